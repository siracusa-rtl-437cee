// nk_pe: one N-EUREKA processing element, computing one output pixel of the 6x6 output tile.
//
// The PE holds COLS columns (nk_col) of nine bit-serial multipliers each, a PE adder that sums
// the column outputs, COLS 32-bit accumulators and one NormQuantUnit (nk_normquant).
//   * 3x3 dense : per step one weight word = one (output channel, bit plane); column c takes input
//                 channel c (c < 28), row r the filter position r; bit (c*9+r) of the word. The PE
//                 adder result is added to accumulator kout_i.
//   * 1x1 dense : per step one weight word = one output channel with all bit planes; column c, row
//                 b takes bit (c*8+b). Result added to accumulator kout_i.
//   * depthwise : per step one bit plane of 28 channels, bit (c*9+r); the column outputs bypass
//                 the PE adder and update accumulators 0..27 in parallel.
// clear_i zeroes all accumulators. With nq_en_i the NormQuantUnit requantizes accumulator
// nq_ch_i and writes the 8-bit result back into it (one channel per cycle).
// All updates happen at the rising clock edge; acc_o shows the registered accumulators.
//
// The column/PE structure, the accumulator count and width and the loop order of the three
// modes follow the published PE diagram and pseudo-code; the bit layout of the weight word is
// this design's choice.
module nk_pe
  import neureka_pkg::*;
#(
  parameter int unsigned COLS      = 32,
  parameter int unsigned ROWS      = 9,
  parameter int unsigned ACC_W     = 32,
  parameter int unsigned COL_OUT_W = 20
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic [ROWS-1:0][COLS-1:0][7:0] act_i,
  input  logic [255:0]                  wgt_i,
  input  logic                          step_i,
  input  nk_mode_e                      mode_i,
  input  logic [3:0]                    qw_i,
  input  logic [4:0]                    kout_i,
  input  logic [2:0]                    wbit_i,
  input  logic                          clear_i,
  input  logic                          nq_en_i,
  input  logic [4:0]                    nq_ch_i,
  input  logic [7:0]                    nq_scale_i,
  input  logic [31:0]                   nq_bias_i,
  input  logic [4:0]                    nq_shift_i,
  output logic [COLS-1:0][ACC_W-1:0]    acc_o
);
  localparam int unsigned SUM_W = COL_OUT_W + $clog2(COLS);

  logic [COLS-1:0][ROWS-1:0]               col_wbit;
  logic [COLS-1:0][ROWS-1:0][7:0]          col_act;
  logic signed [COLS-1:0][COL_OUT_W-1:0]   col_out;
  logic signed [SUM_W-1:0]                 pe_sum;
  logic [COLS-1:0][ACC_W-1:0]              acc_q;
  logic [7:0]                              nq_out;
  logic                                    neg;

  assign neg = (32'(wbit_i) == 32'(qw_i) - 1);

  always_comb begin
    for (int unsigned c = 0; c < COLS; c++) begin
      for (int unsigned r = 0; r < ROWS; r++) begin
        col_act[c][r]  = act_i[r][c];
        col_wbit[c][r] = 1'b0;
        if (mode_i == MODE_1X1) begin
          if (r < 8 && c*8 + r < 256) col_wbit[c][r] = wgt_i[c*8 + r];
        end else begin
          if (c < NK_CH3X3 && c*9 + r < 256) col_wbit[c][r] = wgt_i[c*9 + r];
        end
      end
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_col
    nk_col #(.ROWS(ROWS), .OUT_W(COL_OUT_W)) i_col (
      .act_i  (col_act[c]),
      .wbit_i (col_wbit[c]),
      .mode_i (mode_i),
      .shift_i(wbit_i),
      .neg_i  (neg),
      .qw_i   (qw_i),
      .out_o  (col_out[c])
    );
  end

  // PE adder
  always_comb begin
    pe_sum = '0;
    for (int unsigned c = 0; c < COLS; c++) pe_sum = pe_sum + SUM_W'($signed(col_out[c]));
  end

  nk_normquant #(.ACC_W(ACC_W)) i_nq (
    .acc_i  (acc_q[nq_ch_i]),
    .scale_i(nq_scale_i),
    .bias_i (nq_bias_i),
    .shift_i(nq_shift_i),
    .q_o    (nq_out)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      acc_q <= '0;
    end else if (clear_i) begin
      acc_q <= '0;
    end else if (nq_en_i) begin
      acc_q[nq_ch_i] <= ACC_W'(nq_out);
    end else if (step_i) begin
      if (mode_i == MODE_DW) begin
        for (int unsigned c = 0; c < COLS; c++)
          if (c < NK_CH3X3) acc_q[c] <= acc_q[c] + ACC_W'($signed(col_out[c]));
      end else begin
        acc_q[kout_i] <= acc_q[kout_i] + ACC_W'(pe_sum);
      end
    end
  end

  assign acc_o = acc_q;
endmodule
