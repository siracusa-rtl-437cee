// tb_mram_cut: self-checking test of the behavioural MRAM cut model (reduced to 1024 words).
//
// The clock enable toggles every other cycle (half-rate MRAM clock). Random writes and reads are
// issued on enabled cycles; each read must return the last written data exactly three enabled
// cycles (six cluster cycles) after it was issued, sampled at the enabled edge that consumes it;
// requests on disabled cycles are ignored.
module tb_mram_cut;
  localparam int W = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ce = 0, req = 0, we = 0, rvalid;
  logic [9:0] addr = 0;
  logic [63:0] wdata = 0, rdata;
  logic [63:0] model [W];
  bit written [W];
  int checks = 0, failures = 0, cyc = 0;
  int exp_t [$];
  logic [63:0] exp_d [$];

  mram_cut #(.WORDS(W)) dut (.clk_i(clk), .rst_ni(rst_n), .ce_i(ce), .req_i(req), .we_i(we),
    .addr_i(addr), .wdata_i(wdata), .rvalid_o(rvalid), .rdata_o(rdata));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && ce && rvalid) begin
      if (exp_t.size() == 0) check(0, "unexpected rvalid");
      else begin
        int t;
        t = exp_t.pop_front();
        check(cyc == t, $sformatf("read latency: at %0d expected %0d", cyc, t));
        check(rdata == exp_d.pop_front(), "read data");
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      ce = cyc[0];
      addr = 10'($urandom_range(0, 15));
      req = ($urandom_range(0, 2) != 0);
      we = !written[addr] || ($urandom_range(0, 1) == 1);
      wdata = {$urandom, $urandom};
      if (req && ce) begin
        if (we) begin model[addr] = wdata; written[addr] = 1; end
        else begin exp_t.push_back(cyc + 6); exp_d.push_back(model[addr]); end
      end
    end
    for (int i = 0; i < 10; i++) begin
      @(negedge clk); req = 0; ce = cyc[0];
    end
    check(exp_t.size() == 0, "all reads returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
