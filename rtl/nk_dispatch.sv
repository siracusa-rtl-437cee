// nk_dispatch: dispatching network of N-EUREKA.
//
// Maps an input tile of (PE_DIM+2)x(PE_DIM+2) pixels of 32 channels onto PE_DIM x PE_DIM PEs.
// For the 3x3 modes PE (r,c), row fs = 3*dy + dx, receives pixel (r+dy, c+dx), which is the 3x3
// window around output pixel (r,c). For the 1x1 mode every row of PE (r,c) receives the window's
// centre pixel (r+1, c+1), since the rows then carry bit planes of one weight.
// Purely combinational; the tile index of a pixel is row*(PE_DIM+2)+column.
//
// The 8x8 -> 6x6x9 fan-out is as published; the pixel chosen for the 1x1 mode is this design's
// choice.
module nk_dispatch
  import neureka_pkg::*;
#(
  parameter int unsigned PE_DIM = 6,
  parameter int unsigned COLS   = 32
) (
  input  logic [(PE_DIM+2)*(PE_DIM+2)-1:0][COLS-1:0][7:0]  tile_i,
  input  nk_mode_e                                         mode_i,
  output logic [PE_DIM*PE_DIM-1:0][8:0][COLS-1:0][7:0]     pe_act_o
);
  localparam int unsigned IN_DIM = PE_DIM + 2;

  always_comb begin
    for (int unsigned r = 0; r < PE_DIM; r++)
      for (int unsigned c = 0; c < PE_DIM; c++)
        for (int unsigned fs = 0; fs < 9; fs++) begin
          if (mode_i == MODE_1X1) pe_act_o[r*PE_DIM+c][fs] = tile_i[(r+1)*IN_DIM + c + 1];
          else                    pe_act_o[r*PE_DIM+c][fs] = tile_i[(r + fs/3)*IN_DIM + c + fs%3];
        end
  end
endmodule
