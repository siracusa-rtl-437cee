// tb_tcdm_bank: self-checking test of one L1 TCDM bank (4096 x 32 bit).
//
// Random byte-enabled writes and reads against a reference array; read data must appear in the
// cycle after the request (single-cycle access) and a cycle without request must not write.
module tb_tcdm_bank;
  logic clk = 0;
  always #5 clk = ~clk;
  logic req = 0, we = 0;
  logic [11:0] addr = 0;
  logic [3:0] be = 0;
  logic [31:0] wdata = 0, rdata;
  logic [31:0] model [4096];
  bit written [4096];
  int checks = 0, failures = 0;

  tcdm_bank dut (.clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr), .be_i(be), .wdata_i(wdata), .rdata_o(rdata));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 64; a++) begin
      @(negedge clk); req = 1; we = 1; addr = 12'(a); be = 4'hf; wdata = $urandom;
      model[a] = wdata; written[a] = 1;
    end
    for (int i = 0; i < 4000; i++) begin
      int a;
      a = $urandom_range(0, 63);
      @(negedge clk);
      req = ($urandom_range(0, 3) != 0); we = $urandom_range(0, 1); addr = 12'(a);
      be = 4'($urandom); wdata = $urandom;
      if (req && we) for (int b = 0; b < 4; b++) if (be[b]) model[a][8*b +: 8] = wdata[8*b +: 8];
      if (req && !we) begin
        @(negedge clk);
        req = 0;
        checks++;
        if (rdata != model[a]) begin
          failures++;
          if (failures < 10) $display("FAIL read %0d got %h exp %h", a, rdata, model[a]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
