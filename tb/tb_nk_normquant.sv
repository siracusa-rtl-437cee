// tb_nk_normquant: self-checking test of the NormQuantUnit.
//
// Applies random accumulators, scales, biases and shifts and compares the 8-bit output with
// clip((acc*scale + bias) >>> shift, 0, 255) computed here in 64-bit integers; includes the
// saturation corners.
module tb_nk_normquant;
  logic [31:0] acc, bias;
  logic [7:0]  scale, q;
  logic [4:0]  shift;
  int checks = 0, failures = 0;

  nk_normquant dut (.acc_i(acc), .scale_i(scale), .bias_i(bias), .shift_i(shift), .q_o(q));

  function automatic int ref_q(int a, int s, int b, int sh);
    longint v;
    v = (longint'(a) * longint'(s) + longint'(b)) >>> sh;
    if (v < 0) return 0;
    if (v > 255) return 255;
    return int'(v);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 500; i++) begin
      acc   = (i < 4) ? (i[0] ? 32'h7fff_ffff : 32'h8000_0000) : 32'($signed($urandom_range(0, 200000)) - 100000);
      scale = 8'($urandom);
      bias  = 32'($signed($urandom_range(0, 20000)) - 10000);
      shift = 5'($urandom_range(0, 16));
      #1;
      checks++;
      if (int'(q) != ref_q($signed(acc), int'(scale), $signed(bias), int'(shift))) begin
        failures++;
        $display("FAIL acc=%0d scale=%0d bias=%0d shift=%0d q=%0d", $signed(acc), scale, $signed(bias), shift, q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
