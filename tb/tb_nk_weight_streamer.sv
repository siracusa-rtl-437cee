// tb_nk_weight_streamer: self-checking test of the weight streamer.
//
// A behavioural weight memory answers every accepted request after a fixed 9 cycles and
// withholds ready at random. For each mode and several weight precisions the testbench checks the
// request addresses (consecutive lines from the base), the order and tags of the steps forwarded
// to the PEs (output channel and bit plane, bit plane innermost for 3x3), the data, the number of
// steps (32*qw, 32 or qw) and that done_o pulses with the last step. With ready held high the
// requests must go out at one per cycle.
module tb_nk_weight_streamer;
  import neureka_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, rvalid_i, step, done, rq_valid, rq_ready;
  logic [31:0] base = 0, rq_addr;
  nk_mode_e mode = MODE_3X3;
  logic [3:0] qw = 8;
  logic [255:0] rdata, wgt;
  logic [4:0] kout;
  logic [2:0] wbit;
  int checks = 0, failures = 0;
  bit rand_ready = 1;

  nk_weight_streamer dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .base_i(base), .mode_i(mode),
    .qw_i(qw), .req_valid_o(rq_valid), .req_addr_o(rq_addr), .req_ready_i(rq_ready),
    .resp_valid_i(rvalid_i), .resp_data_i(rdata), .step_o(step), .wgt_o(wgt), .kout_o(kout),
    .wbit_o(wbit), .done_o(done));

  function automatic logic [255:0] line_data(int a);
    return {8{32'(a * 2654435761)}};
  endfunction

  logic [8:0] vpipe;
  logic [255:0] dpipe [9];
  always_ff @(negedge clk) rq_ready <= !rand_ready || ($urandom_range(0, 3) != 0);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vpipe <= '0;
    else begin
      vpipe <= {vpipe[7:0], rq_valid && rq_ready};
      for (int i = 8; i > 0; i--) dpipe[i] <= dpipe[i-1];
      dpipe[0] <= line_data(int'(rq_addr));
    end
  assign rvalid_i = vpipe[8];
  assign rdata = dpipe[8];

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int words, n_req, n_step, first_req, last_req;
      bit got_done;
      mode = nk_mode_e'(t % 3);
      qw = 4'($urandom_range(2, 8));
      rand_ready = (t < 9);
      base = $urandom_range(0, 100000);
      words = (mode == MODE_3X3) ? 32 * qw : (mode == MODE_1X1) ? 32 : qw;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      n_req = 0; n_step = 0; got_done = 0; first_req = -1; last_req = 0;
      for (int c = 0; c < 4000 && !got_done; c++) begin
        #1;
        if (rq_valid && rq_ready) begin
          check(rq_addr == base + n_req, "consecutive request lines");
          if (first_req < 0) first_req = c;
          last_req = c;
          n_req++;
        end
        if (step) begin
          int ek, eb;
          ek = (mode == MODE_3X3) ? n_step / qw : (mode == MODE_1X1) ? n_step : 0;
          eb = (mode == MODE_3X3) ? n_step % qw : (mode == MODE_1X1) ? 0 : n_step;
          check(wgt == line_data(int'(base) + n_step), "step data");
          if (mode != MODE_DW) check(int'(kout) == ek, $sformatf("mode %0d step %0d output channel", mode, n_step));
          if (mode != MODE_1X1) check(int'(wbit) == eb, $sformatf("mode %0d step %0d bit plane", mode, n_step));
          n_step++;
          check(done == (n_step == words), "done with the last step");
          if (done) got_done = 1;
        end else check(!done, "done only with a step");
        @(negedge clk);
      end
      check(n_req == words && n_step == words, $sformatf("mode %0d qw %0d: %0d requests %0d steps", mode, qw, n_req, n_step));
      if (!rand_ready) check(last_req - first_req == words - 1, "one request per cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
