// tb_nk_l1_streamer: self-checking test of N-EUREKA's L1 streamer.
//
// A behavioural L1 (byte array, 288-bit port, random grant, data one cycle after the grant)
// serves two clients: the controller (client 0, reads and writes with byte enables) and the
// prefetcher (client 1, reads). Both issue 256-bit accesses at random byte addresses. Reads must
// return the 32 bytes starting at the requested address to the right client; writes must change
// exactly the enabled bytes. When both request, client 0 must be served first.
module tb_nk_l1_streamer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic c0_req = 0, c0_we = 0, c0_gnt, c0_rvalid, c1_req = 0, c1_gnt, c1_rvalid;
  logic [31:0] c0_addr = 0, c1_addr = 0, l1_addr;
  logic [255:0] c0_wdata = 0, rdata;
  logic [31:0] c0_be = 0;
  logic l1_req, l1_we, l1_gnt, l1_rvalid;
  logic [35:0] l1_be;
  logic [287:0] l1_wdata, l1_rdata;
  byte unsigned mem [4096];
  byte unsigned model [4096];
  int checks = 0, failures = 0;

  nk_l1_streamer dut (.clk_i(clk), .rst_ni(rst_n), .c0_req_i(c0_req), .c0_we_i(c0_we), .c0_addr_i(c0_addr),
    .c0_wdata_i(c0_wdata), .c0_be_i(c0_be), .c0_gnt_o(c0_gnt), .c0_rvalid_o(c0_rvalid), .c1_req_i(c1_req),
    .c1_addr_i(c1_addr), .c1_gnt_o(c1_gnt), .c1_rvalid_o(c1_rvalid), .rdata_o(rdata), .l1_req_o(l1_req),
    .l1_we_o(l1_we), .l1_addr_o(l1_addr), .l1_be_o(l1_be), .l1_wdata_o(l1_wdata), .l1_gnt_i(l1_gnt),
    .l1_rvalid_i(l1_rvalid), .l1_rdata_i(l1_rdata));

  always_ff @(negedge clk) l1_gnt <= ($urandom_range(0, 2) != 0);
  always_ff @(posedge clk) begin
    l1_rvalid <= 1'b0;
    if (l1_req && l1_gnt) begin
      if (l1_we) begin
        for (int b = 0; b < 36; b++) if (l1_be[b]) mem[(int'(l1_addr) + b) % 4096] = l1_wdata[8*b +: 8];
      end else begin
        for (int b = 0; b < 36; b++) l1_rdata[8*b +: 8] <= mem[(int'(l1_addr) + b) % 4096];
        l1_rvalid <= 1'b1;
      end
    end
  end

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
    for (int i = 0; i < 4096; i++) begin mem[i] = 8'($urandom); model[i] = mem[i]; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      int a0, a1;
      bit both;
      a0 = $urandom_range(0, 4000); a1 = $urandom_range(0, 4000);
      @(negedge clk);
      c0_req = ($urandom_range(0, 1) == 1); c0_we = $urandom_range(0, 1); c0_addr = 32'(a0);
      for (int w = 0; w < 8; w++) c0_wdata[32*w +: 32] = $urandom;
      c0_be = $urandom;
      c1_req = !c0_req || ($urandom_range(0, 1) == 1); c1_addr = 32'(a1);
      both = c0_req && c1_req;
      // wait for the first grant
      #1;
      while (!c0_gnt && !c1_gnt) begin @(negedge clk); #1; end
      if (both) check(c0_gnt && !c1_gnt, "client 0 first");
      if (c0_gnt) begin
        bit rd0;
        rd0 = !c0_we;
        if (c0_we) for (int b = 0; b < 32; b++) if (c0_be[b]) model[a0 + b] = c0_wdata[8*b +: 8];
        @(negedge clk); c0_req = 0;
        if (rd0) begin
          check(c0_rvalid && !c1_rvalid, "read data to client 0");
          for (int b = 0; b < 32; b++) check(rdata[8*b +: 8] == model[a0 + b], $sformatf("c0 byte %0d of %0d", b, a0));
        end
        #1;
        while (c1_req && !c1_gnt) begin @(negedge clk); #1; end
      end
      if (c1_req) begin
        @(negedge clk); c1_req = 0;
        check(c1_rvalid && !c0_rvalid, "read data to client 1");
        for (int b = 0; b < 32; b++) check(rdata[8*b +: 8] == model[a1 + b], $sformatf("c1 byte %0d of %0d", b, a1));
      end
    end
    for (int i = 0; i < 4096; i++) check(mem[i] == model[i], "L1 contents after all writes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
