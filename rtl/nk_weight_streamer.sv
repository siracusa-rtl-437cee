// nk_weight_streamer: weight streamer of N-EUREKA.
//
// On start_i the streamer issues, one per cycle under valid/ready, the read requests for all
// 256-bit weight words of one input-channel tile, at consecutive line addresses from base_i:
//   3x3 dense : 32 output channels x qw bit planes (bit plane innermost)
//   1x1 dense : 32 words, one per output channel, all bit planes in parallel
//   depthwise : qw words, one per bit plane of 28 channels
// Responses come back in order, a fixed number of cycles later and without backpressure; each is
// forwarded to the PEs as a step (step_o, wgt_o) tagged with its output channel and bit plane.
// done_o pulses with the last response. The ready input stalls requests (e.g. on a page miss).
//
// The per-mode loop order follows the published pseudo-code; the handshake is this design's
// choice. Weights are broadcast to all PEs without intermediate storage.
module nk_weight_streamer
  import neureka_pkg::*;
(
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         start_i,
  input  logic [31:0]  base_i,
  input  nk_mode_e     mode_i,
  input  logic [3:0]   qw_i,
  // request side
  output logic         req_valid_o,
  output logic [31:0]  req_addr_o,
  input  logic         req_ready_i,
  // response side
  input  logic         resp_valid_i,
  input  logic [255:0] resp_data_i,
  // to the PEs
  output logic         step_o,
  output logic [255:0] wgt_o,
  output logic [4:0]   kout_o,
  output logic [2:0]   wbit_o,
  output logic         done_o
);
  logic [8:0]  n_words, req_cnt_q, rsp_cnt_q;
  logic [31:0] addr_q;
  logic        active_q;
  logic [4:0]  kout_q;
  logic [2:0]  wbit_q;

  always_comb begin
    unique case (mode_i)
      MODE_1X1: n_words = 9'd32;
      MODE_DW:  n_words = 9'(qw_i);
      default:  n_words = 9'(qw_i) << 5;
    endcase
  end

  assign req_valid_o = active_q && (req_cnt_q != n_words);
  assign req_addr_o  = addr_q;
  assign step_o      = resp_valid_i && active_q;
  assign wgt_o       = resp_data_i;
  assign kout_o      = kout_q;
  assign wbit_o      = wbit_q;
  assign done_o      = step_o && (rsp_cnt_q == n_words - 1);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q  <= 1'b0;
      req_cnt_q <= '0;
      rsp_cnt_q <= '0;
      addr_q    <= '0;
      kout_q    <= '0;
      wbit_q    <= '0;
    end else if (start_i) begin
      active_q  <= 1'b1;
      req_cnt_q <= '0;
      rsp_cnt_q <= '0;
      addr_q    <= base_i;
      kout_q    <= '0;
      wbit_q    <= '0;
    end else begin
      if (req_valid_o && req_ready_i) begin
        req_cnt_q <= req_cnt_q + 1;
        addr_q    <= addr_q + 1;
      end
      if (step_o) begin
        rsp_cnt_q <= rsp_cnt_q + 1;
        if (done_o) active_q <= 1'b0;
        unique case (mode_i)
          MODE_1X1: kout_q <= kout_q + 1;
          MODE_DW:  wbit_q <= wbit_q + 1;
          default: begin
            if (4'(wbit_q) == qw_i - 1) begin
              wbit_q <= '0;
              kout_q <= kout_q + 1;
            end else begin
              wbit_q <= wbit_q + 1;
            end
          end
        endcase
      end
    end
  end
endmodule
