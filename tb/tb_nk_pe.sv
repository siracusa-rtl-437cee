// tb_nk_pe: self-checking test of one N-EUREKA processing element.
//
// Drives random activations and random signed weights through the three modes and compares the
// accumulators with a reference computed here from the integer weights: 3x3 dense (two output
// channels, 5-bit weights, bit-serial, one step per bit plane), 1x1 dense (two output channels,
// 8-bit weights, one step each), depthwise (3-bit weights, 28 channels in parallel), and finally
// requantization of one channel through the NormQuantUnit.
module tb_nk_pe;
  import neureka_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [8:0][31:0][7:0] act;
  logic [255:0] wgt;
  logic step = 0, clear = 0, nq_en = 0;
  nk_mode_e mode = MODE_3X3;
  logic [3:0] qw = 4'd5;
  logic [4:0] kout = 0, nq_ch = 0;
  logic [2:0] wbit = 0;
  logic [7:0] nq_scale = 0;
  logic [31:0] nq_bias = 0;
  logic [4:0] nq_shift = 0;
  logic [31:0][31:0] acc;

  int checks = 0, failures = 0;

  nk_pe dut (.clk_i(clk), .rst_ni(rst_n), .act_i(act), .wgt_i(wgt), .step_i(step), .mode_i(mode),
             .qw_i(qw), .kout_i(kout), .wbit_i(wbit), .clear_i(clear), .nq_en_i(nq_en),
             .nq_ch_i(nq_ch), .nq_scale_i(nq_scale), .nq_bias_i(nq_bias), .nq_shift_i(nq_shift),
             .acc_o(acc));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  int w3 [2][28][9];
  int w1 [2][32];
  int wd [28][9];
  int ref_acc;

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 9; r++) for (int c = 0; c < 32; c++) act[r][c] = 8'($urandom);
    wgt = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---------------- 3x3 dense, 5-bit weights
    for (int k = 0; k < 2; k++) for (int c = 0; c < 28; c++) for (int r = 0; r < 9; r++)
      w3[k][c][r] = $urandom_range(0, 31) - 16;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int k = 0; k < 2; k++)
      for (int b = 0; b < 5; b++) begin
        wgt = '0;
        for (int c = 0; c < 28; c++) for (int r = 0; r < 9; r++) wgt[c*9+r] = w3[k][c][r][b];
        kout = 5'(k); wbit = 3'(b); step = 1;
        @(negedge clk);
      end
    step = 0;
    for (int k = 0; k < 2; k++) begin
      ref_acc = 0;
      for (int c = 0; c < 28; c++) for (int r = 0; r < 9; r++) ref_acc += int'(act[r][c]) * w3[k][c][r];
      check($signed(acc[k]) == ref_acc, $sformatf("3x3 k=%0d acc=%0d ref=%0d", k, $signed(acc[k]), ref_acc));
    end
    // ---------------- 1x1 dense, 8-bit weights (all rows carry the same activation)
    for (int c = 0; c < 32; c++) for (int r = 0; r < 9; r++) act[r][c] = act[4][c];
    mode = MODE_1X1; qw = 4'd8;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int k = 0; k < 2; k++) begin
      for (int c = 0; c < 32; c++) w1[k][c] = $urandom_range(0, 255) - 128;
      wgt = '0;
      for (int c = 0; c < 32; c++) for (int b = 0; b < 8; b++) wgt[c*8+b] = w1[k][c][b];
      kout = 5'(k + 3); wbit = 0; step = 1;
      @(negedge clk);
    end
    step = 0;
    for (int k = 0; k < 2; k++) begin
      ref_acc = 0;
      for (int c = 0; c < 32; c++) ref_acc += int'(act[4][c]) * w1[k][c];
      check($signed(acc[k+3]) == ref_acc, $sformatf("1x1 k=%0d acc=%0d ref=%0d", k, $signed(acc[k+3]), ref_acc));
    end
    check(acc[0] == 0, "1x1 leaves other accumulators cleared");
    // ---------------- depthwise, 3-bit weights
    for (int r = 0; r < 9; r++) for (int c = 0; c < 32; c++) act[r][c] = 8'($urandom);
    mode = MODE_DW; qw = 4'd3;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int c = 0; c < 28; c++) for (int r = 0; r < 9; r++) wd[c][r] = $urandom_range(0, 7) - 4;
    for (int b = 0; b < 3; b++) begin
      wgt = '0;
      for (int c = 0; c < 28; c++) for (int r = 0; r < 9; r++) wgt[c*9+r] = wd[c][r][b];
      wbit = 3'(b); kout = 0; step = 1;
      @(negedge clk);
    end
    step = 0;
    for (int c = 0; c < 32; c++) begin
      ref_acc = 0;
      if (c < 28) for (int r = 0; r < 9; r++) ref_acc += int'(act[r][c]) * wd[c][r];
      check($signed(acc[c]) == ref_acc, $sformatf("dw c=%0d acc=%0d ref=%0d", c, $signed(acc[c]), ref_acc));
    end
    // ---------------- requantize channel 5
    begin
      longint v;
      v = (longint'($signed(acc[5])) * 3 + 1000) >>> 4;
      if (v < 0) v = 0;
      if (v > 255) v = 255;
      nq_ch = 5; nq_scale = 3; nq_bias = 1000; nq_shift = 4; nq_en = 1;
      @(negedge clk); nq_en = 0;
      check(acc[5] == 32'(v), $sformatf("normquant %0d vs %0d", acc[5], v));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
