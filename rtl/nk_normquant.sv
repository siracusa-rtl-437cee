// nk_normquant: NormQuantUnit of an N-EUREKA PE.
//
// Requantizes a 32-bit signed accumulator to an unsigned 8-bit activation with an integer affine
// projection: q = clip((acc * scale + bias) >>> shift, 0, 255). Scale, bias and shift are per
// output channel and come from memory. Purely combinational; the engine time-multiplexes one
// unit per PE over the channels.
//
// Per-channel scale, bias and right shift are as published; the widths (8-bit unsigned scale,
// 32-bit bias, 5-bit shift), the absence of rounding and the clip to [0,255] are this design's
// choices.
module nk_normquant #(
  parameter int unsigned ACC_W   = 32,
  parameter int unsigned SCALE_W = 8
) (
  input  logic [ACC_W-1:0]   acc_i,
  input  logic [SCALE_W-1:0] scale_i,
  input  logic [31:0]        bias_i,
  input  logic [4:0]         shift_i,
  output logic [7:0]         q_o
);
  localparam int unsigned P_W = ACC_W + SCALE_W + 2;

  logic signed [P_W-1:0] prod, shifted;

  always_comb begin
    prod    = P_W'($signed(acc_i)) * $signed({1'b0, scale_i}) + P_W'($signed(bias_i));
    shifted = prod >>> shift_i;
    if (shifted < 0)        q_o = 8'd0;
    else if (shifted > 255) q_o = 8'd255;
    else                    q_o = shifted[7:0];
  end
endmodule
