// tb_nmem_page_manager: self-checking test of the weight-memory page manager.
//
// Random line addresses, page registers and ready inputs with paging disabled and enabled; the
// routing (MRAM, tile SRAM or miss), the page offset, the stall and the page-miss interrupt are
// compared with a model, and page_switch_o must pulse exactly when an accepted request goes to the
// other memory than the previous accepted one.
module tb_nmem_page_manager;
  localparam int PB = 11;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic page_en = 0, valid = 0, ready, mv, sv, m_ready = 1, s_ready = 1, miss, sw;
  logic [7:0] mpage = 0, spage = 1;
  logic [31:0] line = 0;
  logic [PB-1:0] off;
  int checks = 0, failures = 0, n_sw = 0, n_miss = 0, last = -1;

  nmem_page_manager #(.PAGE_BITS(PB)) dut (.clk_i(clk), .rst_ni(rst_n), .page_en_i(page_en),
    .mram_page_i(mpage), .sram_page_i(spage), .valid_i(valid), .line_i(line), .ready_o(ready),
    .mram_valid_o(mv), .sram_valid_o(sv), .offset_o(off), .mram_ready_i(m_ready), .sram_ready_i(s_ready),
    .page_miss_o(miss), .page_switch_o(sw));

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
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      int pg, mp, sp, tgt;
      bit acc;
      @(negedge clk);
      page_en = (i >= 2500);
      mpage = 8'($urandom_range(0, 3)); spage = 8'($urandom_range(0, 3));
      pg = $urandom_range(0, 3);
      line = 32'(pg * (1 << PB) + $urandom_range(0, (1 << PB) - 1));
      valid = ($urandom_range(0, 4) != 0);
      m_ready = ($urandom_range(0, 3) != 0); s_ready = ($urandom_range(0, 3) != 0);
      mp = page_en ? mpage : 0; sp = page_en ? spage : 1;
      tgt = (pg == mp) ? 0 : (pg == sp) ? 1 : 2;
      #1;
      check(mv == (valid && tgt == 0) && sv == (valid && tgt == 1), "routing");
      check(off == line[PB-1:0], "page offset");
      check(miss == (valid && tgt == 2), "page miss");
      check(ready == ((tgt == 0 && m_ready) || (tgt == 1 && s_ready)), "stall");
      acc = valid && ready;
      check(sw == (acc && last >= 0 && last != tgt), "page switch");
      if (miss) n_miss++;
      if (sw) n_sw++;
      if (acc) last = tgt;
    end
    check(n_sw > 0 && n_miss > 0, "page switches and misses occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
