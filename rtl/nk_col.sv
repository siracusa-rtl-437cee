// nk_col: one column of an N-EUREKA processing element.
//
// A column holds nine 1x8-bit multipliers (an 8-bit activation gated by one weight bit), a
// column adder and a shifter. In the bit-serial 3x3 modes the nine rows are the nine positions
// of the 3x3 filter window of one input channel for one weight bit plane: the rows are summed
// and the sum is shifted left by the bit index; the most significant plane of a two's
// complement weight is subtracted. In the bit-parallel 1x1 mode the rows carry the bit planes
// of one weight (row b = bit b) against the same activation, and the adder weights row b by
// 2^b itself, so the shifter is left at zero.
//
// The multiplier/adder/shifter structure and the 20-bit output follow the published column
// diagram; the signed-weight handling and the way the 1x1 mode configures the adder are this
// design's own choices. Purely combinational.
module nk_col
  import neureka_pkg::*;
#(
  parameter int unsigned ROWS  = 9,
  parameter int unsigned OUT_W = 20
) (
  input  logic [ROWS-1:0][7:0]   act_i,    // unsigned activations, one per row
  input  logic [ROWS-1:0]        wbit_i,   // one weight bit per row
  input  nk_mode_e               mode_i,
  input  logic [2:0]             shift_i,  // bit index of the current plane (bit-serial modes)
  input  logic                   neg_i,    // current plane is the sign plane (bit-serial modes)
  input  logic [3:0]             qw_i,     // weight bits (1x1 mode)
  output logic signed [OUT_W-1:0] out_o
);
  logic signed [OUT_W-1:0] sum;

  always_comb begin
    sum = '0;
    if (mode_i == MODE_1X1) begin
      for (int unsigned b = 0; b < ROWS; b++) begin
        if (b < 8 && b < 32'(qw_i) && wbit_i[b]) begin
          if (b == 32'(qw_i) - 1) sum = sum - (OUT_W'(act_i[b]) << b);
          else                     sum = sum + (OUT_W'(act_i[b]) << b);
        end
      end
      out_o = sum;
    end else begin
      for (int unsigned r = 0; r < ROWS; r++)
        if (wbit_i[r]) sum = sum + OUT_W'(act_i[r]);
      sum   = sum <<< shift_i;
      out_o = neg_i ? -sum : sum;
    end
  end
endmodule
