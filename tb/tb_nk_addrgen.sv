// tb_nk_addrgen: self-checking test of the 3-D strided address generator.
//
// For random bases, strides and lengths the generated sequence is compared with three nested
// loops (i0 innermost); next_i is applied with random gaps, and with next_i held high the
// generator must deliver one address per cycle. last_o must mark exactly the final address.
module tb_nk_addrgen;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, next = 0, valid, last;
  logic [31:0] base, d0, d1, d2, addr;
  logic [15:0] l0, l1, l2;
  int checks = 0, failures = 0;

  nk_addrgen dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .base_i(base), .d0_i(d0), .d1_i(d1),
    .d2_i(d2), .len0_i(l0), .len1_i(l1), .len2_i(l2), .next_i(next), .valid_o(valid), .addr_o(addr), .last_o(last));

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
    for (int t = 0; t < 60; t++) begin
      int n, total, t0;
      bit gaps;
      gaps = t[0];
      base = $urandom; d0 = $urandom_range(0, 300); d1 = $urandom_range(0, 5000); d2 = $urandom_range(0, 70000);
      l0 = 16'($urandom_range(1, 9)); l1 = 16'($urandom_range(1, 6)); l2 = 16'($urandom_range(1, 4));
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      total = l0 * l1 * l2; n = 0; t0 = 0;
      for (int i2 = 0; i2 < l2; i2++) for (int i1 = 0; i1 < l1; i1++) for (int i0 = 0; i0 < l0; i0++) begin
        next = 0;
        if (gaps) repeat ($urandom_range(0, 2)) @(negedge clk);
        check(valid, "valid while addresses remain");
        check(addr == base + i0 * d0 + i1 * d1 + i2 * d2, $sformatf("address %0d/%0d/%0d", i0, i1, i2));
        check(last == (n == total - 1), "last marks the final address");
        next = 1;
        @(negedge clk);
        t0++;
        n++;
      end
      next = 0;
      check(!valid, "idle after the pattern");
      if (!gaps) check(t0 == total, "one address per cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
