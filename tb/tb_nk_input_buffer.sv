// tb_nk_input_buffer: self-checking test of the input buffer.
//
// Writes 64 random pixels in a shuffled order, rewrites a few, then checks that the whole-tile
// read output holds the last value written to every pixel, and that a cycle without write
// enable changes nothing.
module tb_nk_input_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [5:0] waddr = 0;
  logic [255:0] wdata = 0;
  logic [63:0][255:0] tile, model;
  int checks = 0, failures = 0;

  nk_input_buffer dut (.clk_i(clk), .rst_ni(rst_n), .we_i(we), .waddr_i(waddr), .wdata_i(wdata), .tile_o(tile));

  initial begin
    #50000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 80; i++) begin
      waddr = 6'((i * 37) % 64);
      for (int w = 0; w < 8; w++) wdata[w*32 +: 32] = $urandom;
      we = 1;
      model[waddr] = wdata;
      @(negedge clk);
    end
    we = 0;
    wdata = '1;
    waddr = 6'd3;
    @(negedge clk);
    for (int p = 0; p < 64; p++) begin
      checks++;
      if (tile[p] != model[p]) begin
        failures++;
        $display("FAIL pixel %0d", p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
