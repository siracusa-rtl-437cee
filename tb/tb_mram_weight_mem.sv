// tb_mram_weight_mem: self-checking test of the MRAM weight memory (cuts reduced to 256 words).
//
// 1. Fills every line through the 64-bit cluster port (four words per line) and reads a sample
//    back through the same port.
// 2. Streams lines to the N-EUREKA port: a run of consecutive lines with valid held high, then
//    random lines with random valid gaps (including back-to-back requests to the same half).
//    Every response is compared with the written data, must come in request order and exactly
//    9 cycles after its request was taken. Rate check: the consecutive run must be accepted at one
//    line per cycle (256 lines in at most 256 + 2 cycles), and same-half stalls must occur.
module tb_mram_weight_mem;
  localparam int CW = 256;
  localparam int LW = $clog2(CW) + 1;
  localparam int NL = 2 * CW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ne_valid = 0, ne_ready, ne_rvalid, bus_req = 0, bus_we = 0, bus_gnt, bus_rvalid, ce;
  logic [LW-1:0] ne_line = 0;
  logic [255:0] ne_rdata;
  logic [LW+1:0] bus_word = 0;
  logic [63:0] bus_wdata = 0, bus_rdata;
  int checks = 0, failures = 0, cyc = 0, stalls = 0;
  logic [255:0] model [NL];
  int q_line [$];
  int q_time [$];

  mram_weight_mem #(.CUT_WORDS(CW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .ne_valid_i(ne_valid), .ne_line_i(ne_line), .ne_ready_o(ne_ready),
    .ne_rvalid_o(ne_rvalid), .ne_rdata_o(ne_rdata), .bus_req_i(bus_req), .bus_we_i(bus_we),
    .bus_word_i(bus_word), .bus_wdata_i(bus_wdata), .bus_gnt_o(bus_gnt), .bus_rvalid_o(bus_rvalid),
    .bus_rdata_o(bus_rdata), .mram_ce_o(ce));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && ne_valid && ne_ready) begin q_line.push_back(int'(ne_line)); q_time.push_back(cyc); end
    if (rst_n && ne_valid && !ne_ready) stalls++;
    if (rst_n && ne_rvalid) begin
      int l, t;
      if (q_line.size() == 0) check(0, "response without request");
      else begin
        l = q_line.pop_front(); t = q_time.pop_front();
        check(ne_rdata == model[l], $sformatf("line %0d data", l));
        check(cyc - t == 9, $sformatf("line %0d latency %0d", l, cyc - t));
      end
    end
  end

  task automatic bus(bit we, int word, logic [63:0] d, output logic [63:0] r);
    @(negedge clk); bus_req = 1; bus_we = we; bus_word = (LW+2)'(word); bus_wdata = d;
    @(posedge clk); while (!bus_gnt) @(posedge clk);
    @(negedge clk); bus_req = 0;
    while (!bus_rvalid) @(posedge clk);
    r = bus_rdata;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] r;
    int t0, n;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < NL; l++) begin
      for (int q = 0; q < 4; q++) model[l][64*q +: 64] = {$urandom, $urandom};
      for (int q = 0; q < 4; q++) bus(1, 4 * l + q, model[l][64*q +: 64], r);
    end
    for (int i = 0; i < 40; i++) begin
      int w;
      w = $urandom_range(0, 4 * NL - 1);
      bus(0, w, 0, r);
      check(r == model[w / 4][64 * (w % 4) +: 64], $sformatf("bus read word %0d", w));
    end
    // consecutive stream, valid held high
    @(negedge clk);
    t0 = cyc; n = 0;
    ne_valid = 1; ne_line = 0;
    while (n < 256) begin
      @(posedge clk);
      if (ne_ready) begin n++; end
      @(negedge clk);
      ne_line = LW'(n);
    end
    ne_valid = 0;
    check(cyc - t0 <= 258, $sformatf("256 consecutive lines took %0d cycles", cyc - t0));
    // random lines and gaps
    for (int i = 0; i < 600; i++) begin
      ne_valid = ($urandom_range(0, 3) != 0);
      ne_line = LW'($urandom_range(0, NL - 1));
      @(posedge clk);
      while (ne_valid && !ne_ready) @(posedge clk);
      @(negedge clk);
    end
    ne_valid = 0;
    repeat (20) @(posedge clk);
    check(q_line.size() == 0, "all responses returned");
    check(stalls > 0, "same-half stalls occurred");
    $display("INFO stalls=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
