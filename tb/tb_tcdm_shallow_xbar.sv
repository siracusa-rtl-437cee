// tb_tcdm_shallow_xbar: self-checking test of N-EUREKA's wide L1 branch.
//
// The crossbar is connected to sixteen behavioural 32-bit banks (single-cycle read). Random
// 288-bit writes with byte enables at random word addresses (any bank alignment, including wrap
// around bank 15 -> 0) are compared against a byte-level model, and 288-bit reads must return the
// nine consecutive words one cycle after the granted request. Exactly nine banks are requested.
module tb_tcdm_shallow_xbar;
  localparam int NB = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req = 0, we = 0, gnt = 1, rvalid, bank_we;
  logic [31:0] addr = 0;
  logic [35:0] be = 0;
  logic [287:0] wdata = 0, rdata;
  logic [NB-1:0] bank_req;
  logic [NB-1:0][11:0] bank_addr;
  logic [NB-1:0][3:0] bank_be;
  logic [NB-1:0][31:0] bank_wdata, bank_rdata;
  logic [31:0] banks [NB][256];
  logic [31:0] model [4096];
  int checks = 0, failures = 0;

  tcdm_shallow_xbar dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .we_i(we), .addr_i(addr), .be_i(be),
    .wdata_i(wdata), .gnt_i(gnt), .rvalid_o(rvalid), .rdata_o(rdata), .bank_req_o(bank_req),
    .bank_addr_o(bank_addr), .bank_we_o(bank_we), .bank_be_o(bank_be), .bank_wdata_o(bank_wdata),
    .bank_rdata_i(bank_rdata));

  always_ff @(posedge clk)
    for (int b = 0; b < NB; b++)
      if (bank_req[b]) begin
        if (bank_we) begin
          for (int y = 0; y < 4; y++) if (bank_be[b][y]) banks[b][bank_addr[b][7:0]][8*y +: 8] <= bank_wdata[b][8*y +: 8];
        end else bank_rdata[b] <= banks[b][bank_addr[b][7:0]];
      end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < NB; b++) for (int r = 0; r < 256; r++) banks[b][r] = 0;
    foreach (model[i]) model[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      int w;
      w = $urandom_range(0, 4096 - 10);
      @(negedge clk);
      req = 1; we = $urandom_range(0, 1); addr = 32'(4 * w);
      be = {$urandom, $urandom}; for (int k = 0; k < 9; k++) wdata[32*k +: 32] = $urandom;
      #1 check($countones(bank_req) == 9, "nine banks requested");
      if (we) begin
        for (int k = 0; k < 9; k++) for (int y = 0; y < 4; y++)
          if (be[4*k + y]) model[w + k][8*y +: 8] = wdata[32*k + 8*y +: 8];
        @(negedge clk); req = 0;
      end else begin
        @(negedge clk); req = 0;
        check(rvalid, "rvalid one cycle after the grant");
        for (int k = 0; k < 9; k++) check(rdata[32*k +: 32] == model[w + k], $sformatf("read word %0d of %0d", k, w));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
