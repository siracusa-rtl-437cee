// tb_neural_mem_subsystem: self-checking test of the Neural Memory Subsystem (MRAM cuts reduced
// to 256 words, so a page is 512 lines).
//
// 1. Fills the MRAM (page 0) and the tile SRAM through the 64-bit cluster port and reads the
//    page registers back (reset values: paging off, MRAM page 0, SRAM page 1).
// 2. With paging off, streams lines 400..623 (crossing from the MRAM into the tile SRAM): every
//    response must be the right line, exactly 9 cycles after the request was taken; the
//    page-switch interrupt must pulse at the crossing.
// 3. With paging on, requests line 3*512+5: the request stalls and the page-miss interrupt is
//    raised until the SRAM page register is set to 3; then it completes with the SRAM data.
module tb_neural_mem_subsystem;
  import neureka_pkg::*;
  localparam int CW = 256, PL = 2 * CW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ne_valid = 0, ne_ready, ne_rvalid, bus_req = 0, bus_we = 0, bus_gnt, bus_rvalid, miss, sw;
  logic [31:0] ne_line = 0, bus_addr = 0;
  logic [255:0] ne_rdata;
  logic [63:0] bus_wdata = 0, bus_rdata;
  logic [255:0] mram [PL];
  logic [255:0] sram [PL];
  int checks = 0, failures = 0, cyc = 0, n_sw = 0, n_miss = 0;
  int q_line [$];
  int q_time [$];

  neural_mem_subsystem #(.CUT_WORDS(CW)) dut (.clk_i(clk), .rst_ni(rst_n), .ne_valid_i(ne_valid),
    .ne_line_i(ne_line), .ne_ready_o(ne_ready), .ne_rvalid_o(ne_rvalid), .ne_rdata_o(ne_rdata),
    .bus_req_i(bus_req), .bus_we_i(bus_we), .bus_addr_i(bus_addr), .bus_wdata_i(bus_wdata),
    .bus_gnt_o(bus_gnt), .bus_rvalid_o(bus_rvalid), .bus_rdata_o(bus_rdata),
    .irq_page_miss_o(miss), .irq_page_switch_o(sw));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  function automatic logic [255:0] expect_line(int l);
    int pg, off;
    pg = l / PL; off = l % PL;
    return (pg == 0) ? mram[off] : sram[off];
  endfunction

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && sw) n_sw++;
    if (rst_n && miss) n_miss++;
    if (rst_n && ne_valid && ne_ready) begin q_line.push_back(int'(ne_line)); q_time.push_back(cyc); end
    if (rst_n && ne_rvalid) begin
      int l, t;
      if (q_line.size() == 0) check(0, "response without request");
      else begin
        l = q_line.pop_front(); t = q_time.pop_front();
        check(ne_rdata == expect_line(l), $sformatf("line %0d data", l));
        check(cyc - t == 9, $sformatf("line %0d latency %0d", l, cyc - t));
      end
    end
  end

  task automatic bus(bit we, int a, logic [63:0] d, output logic [63:0] r);
    @(negedge clk); bus_req = 1; bus_we = we; bus_addr = 32'(a); bus_wdata = d;
    @(posedge clk); while (!bus_gnt) @(posedge clk);
    @(negedge clk); bus_req = 0;
    while (!bus_rvalid) @(posedge clk);
    r = bus_rdata;
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] r;
    int n;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < PL; l++)
      for (int q = 0; q < 4; q++) begin
        mram[l][64*q +: 64] = {$urandom, $urandom};
        sram[l][64*q +: 64] = {$urandom, $urandom};
        bus(1, NMEM_MRAM_BASE + 32 * l + 8 * q, mram[l][64*q +: 64], r);
        bus(1, NMEM_SRAM_BASE + 32 * l + 8 * q, sram[l][64*q +: 64], r);
      end
    bus(0, NMEM_MRAM_BASE + 32 * 77 + 16, 0, r); check(r == mram[77][128 +: 64], "MRAM read over the cluster port");
    bus(0, NMEM_SRAM_BASE + 32 * 99 + 8, 0, r);  check(r == sram[99][64 +: 64], "SRAM read over the cluster port");
    bus(0, NMEM_CFG_BASE, 0, r);        check(r == 0, "paging off after reset");
    bus(0, NMEM_CFG_BASE + 'h8, 0, r);  check(r == 0, "MRAM page 0 after reset");
    bus(0, NMEM_CFG_BASE + 'h10, 0, r); check(r == 1, "SRAM page 1 after reset");
    // stream across the page boundary
    n = 400;
    @(negedge clk);
    while (n < 624) begin
      ne_valid = 1; ne_line = 32'(n);
      @(posedge clk);
      if (ne_ready) n++;
      @(negedge clk);
    end
    ne_valid = 0;
    repeat (12) @(posedge clk);
    check(q_line.size() == 0, "all responses returned");
    check(n_sw == 1, $sformatf("one page switch at the boundary (%0d)", n_sw));
    // paging on, unmapped page
    bus(1, NMEM_CFG_BASE, 1, r);
    @(negedge clk);
    ne_valid = 1; ne_line = 32'(3 * PL + 5);
    repeat (10) begin #1 check(!ne_ready && miss, "stalled on a page miss"); @(negedge clk); end
    fork
      bus(1, NMEM_CFG_BASE + 'h10, 3, r);
      begin
        @(posedge clk);
        while (!ne_ready) @(posedge clk);
        @(negedge clk);
        ne_valid = 0;
      end
    join
    repeat (12) @(posedge clk);
    check(q_line.size() == 0 && n_miss >= 10, "request completed after the page was mapped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
