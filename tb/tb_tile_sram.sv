// tb_tile_sram: self-checking test of the tile SRAM (banks reduced to 512 lines).
//
// Writes random data through the 64-bit cluster port, reads it back through the cluster port and
// through the 256-bit N-EUREKA port (data one cycle after the request). Checks that N-EUREKA has
// priority: a cluster request in a cycle with an N-EUREKA read is not granted.
module tb_tile_sram;
  localparam int BW = 512;
  localparam int RW = $clog2(BW);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ne_req = 0, bus_req = 0, bus_we = 0, bus_gnt, bus_rvalid;
  logic [RW-1:0] ne_line = 0;
  logic [255:0] ne_rdata;
  logic [RW+1:0] bus_word = 0;
  logic [63:0] bus_wdata = 0, bus_rdata;
  logic [255:0] model [BW];
  int checks = 0, failures = 0;

  tile_sram #(.BANK_WORDS(BW)) dut (.clk_i(clk), .rst_ni(rst_n), .ne_req_i(ne_req), .ne_line_i(ne_line),
    .ne_rdata_o(ne_rdata), .bus_req_i(bus_req), .bus_we_i(bus_we), .bus_word_i(bus_word),
    .bus_wdata_i(bus_wdata), .bus_gnt_o(bus_gnt), .bus_rvalid_o(bus_rvalid), .bus_rdata_o(bus_rdata));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  task automatic bus(bit we, int word, logic [63:0] d, output logic [63:0] r);
    @(negedge clk); bus_req = 1; bus_we = we; bus_word = (RW+2)'(word); bus_wdata = d;
    @(posedge clk); while (!bus_gnt) @(posedge clk);
    @(negedge clk); bus_req = 0;
    while (!bus_rvalid) @(posedge clk);
    r = bus_rdata;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] r;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < BW; l++)
      for (int q = 0; q < 4; q++) begin
        model[l][64*q +: 64] = {$urandom, $urandom};
        bus(1, 4 * l + q, model[l][64*q +: 64], r);
      end
    for (int i = 0; i < 50; i++) begin
      int w;
      w = $urandom_range(0, 4 * BW - 1);
      bus(0, w, 0, r);
      check(r == model[w / 4][64 * (w % 4) +: 64], $sformatf("bus read word %0d", w));
    end
    for (int i = 0; i < 300; i++) begin
      int l;
      l = $urandom_range(0, BW - 1);
      @(negedge clk); ne_req = 1; ne_line = RW'(l); bus_req = 1; bus_we = 0;
      #1 check(!bus_gnt, "cluster access held off during an N-EUREKA read");
      @(negedge clk); ne_req = 0; bus_req = 0;
      check(ne_rdata == model[l], $sformatf("N-EUREKA read line %0d", l));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
