// nk_input_buffer: one N-EUREKA input buffer, holding an 8x8-pixel tile of 32 8-bit channels.
//
// The buffer is written one 256-bit pixel (32 channels) per cycle at pixel index waddr_i
// (row-major, index = 8*row + column) and read as a whole: tile_o presents all 64 pixels at once
// to the dispatching network. Writes take effect at the rising clock edge.
//
// Size and organisation (64 x 32 x 8 bit, whole-tile read) are as published; the published buffer
// is a latch-based standard-cell memory, this one uses flip-flops, reset to zero.
module nk_input_buffer #(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned WIDTH = 256
) (
  input  logic                           clk_i,
  input  logic                           rst_ni,
  input  logic                           we_i,
  input  logic [$clog2(DEPTH)-1:0]       waddr_i,
  input  logic [WIDTH-1:0]               wdata_i,
  output logic [DEPTH-1:0][WIDTH-1:0]    tile_o
);
  logic [DEPTH-1:0][WIDTH-1:0] mem_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)   mem_q <= '0;
    else if (we_i) mem_q[waddr_i] <= wdata_i;
  end

  assign tile_o = mem_q;
endmodule
