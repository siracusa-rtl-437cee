// neureka: N-EUREKA convolution accelerator.
//
// N-EUREKA runs quantized convolution layers (3x3 dense, 1x1 dense, 3x3 depthwise) with 8-bit
// activations and 2..8-bit weights on PE_DIM x PE_DIM processing elements (6x6 by default), each
// computing one output pixel for 32 output channels. A layer is split into tiles and walked in
// the order output-channel tile, tile row, tile column, input-channel tile (innermost):
//   prefetch  : the input tile of (PE_DIM+2)^2 pixels x 32 channels is read from L1 through the
//               L1 streamer (one 256-bit pixel per access) into one of two input buffers. The
//               prefetcher runs ahead and fills the other buffer while the current tile executes.
//   execution : the weight streamer reads the tile's weight words from the Neural Memory
//               Subsystem; each returned word is broadcast to all PEs, which accumulate one output
//               channel and bit plane (3x3), one output channel (1x1) or one bit plane of 28
//               channels (depthwise) per word.
//   norm/quant: after the last input-channel tile, 192 bytes of per-channel parameters are
//               loaded from L1 and every PE requantizes its accumulators, one channel per cycle
//               (skipped when 32-bit outputs are selected).
//   streamout : the output selector writes every PE's 32 outputs back to L1, one 256-bit beat
//               per pixel (8-bit outputs) or four beats per pixel (32-bit outputs).
// Jobs are programmed through the configuration port (nk_regfile); evt_done_o pulses when a job
// has been written back completely. The L1 port is a 288-bit request/grant port with read data
// one cycle after the grant; the weight port is valid/ready with in-order responses.
//
// The datapath sizes, the double input buffer with overlapped prefetch, the weight broadcast from
// the weight memory and the phase sequence are as published. Tile addressing by base and strides,
// the parameter layout, and issuing the weight stream of an input-channel tile only after the
// previous one has returned (a bubble of one memory latency per tile) are this design's choices.
module neureka
  import neureka_pkg::*;
#(
  parameter int unsigned PE_DIM = 6,
  parameter int unsigned COLS   = 32
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  // configuration (peripheral interconnect)
  input  logic         cfg_req_i,
  input  logic         cfg_we_i,
  input  logic [7:0]   cfg_addr_i,
  input  logic [31:0]  cfg_wdata_i,
  output logic         cfg_gnt_o,
  output logic         cfg_rvalid_o,
  output logic [31:0]  cfg_rdata_o,
  // L1 port (shallow interconnect)
  output logic         l1_req_o,
  output logic         l1_we_o,
  output logic [31:0]  l1_addr_o,
  output logic [35:0]  l1_be_o,
  output logic [287:0] l1_wdata_o,
  input  logic         l1_gnt_i,
  input  logic         l1_rvalid_i,
  input  logic [287:0] l1_rdata_i,
  // weight port (Neural Memory Subsystem)
  output logic         w_req_valid_o,
  output logic [31:0]  w_req_addr_o,
  input  logic         w_req_ready_i,
  input  logic         w_resp_valid_i,
  input  logic [255:0] w_resp_data_i,
  // status
  output logic         busy_o,
  output logic         evt_done_o
);
  localparam int unsigned IN_DIM = PE_DIM + 2;
  localparam int unsigned N_PIX  = IN_DIM * IN_DIM;
  localparam int unsigned N_PE   = PE_DIM * PE_DIM;
  localparam int unsigned PIX_W  = $clog2(N_PIX);

  // ------------------------------------------------------------------ controller
  logic    job_valid, job_done;
  nk_job_t job;

  nk_regfile i_regfile (
    .clk_i, .rst_ni,
    .cfg_req_i, .cfg_we_i, .cfg_addr_i, .cfg_wdata_i, .cfg_gnt_o, .cfg_rvalid_o, .cfg_rdata_o,
    .job_valid_o(job_valid), .job_o(job), .job_done_i(job_done), .busy_i(busy_o)
  );

  // ------------------------------------------------------------------ L1 streamer
  logic         c0_req, c0_we, c0_gnt, c0_rvalid, c1_req, c1_gnt, c1_rvalid;
  logic [31:0]  c0_addr, c1_addr;
  logic [255:0] c0_wdata, l1s_rdata;
  logic [31:0]  c0_be;

  nk_l1_streamer i_l1s (
    .clk_i, .rst_ni,
    .c0_req_i(c0_req), .c0_we_i(c0_we), .c0_addr_i(c0_addr), .c0_wdata_i(c0_wdata), .c0_be_i(c0_be),
    .c0_gnt_o(c0_gnt), .c0_rvalid_o(c0_rvalid),
    .c1_req_i(c1_req), .c1_addr_i(c1_addr), .c1_gnt_o(c1_gnt), .c1_rvalid_o(c1_rvalid),
    .rdata_o(l1s_rdata),
    .l1_req_o, .l1_we_o, .l1_addr_o, .l1_be_o, .l1_wdata_o, .l1_gnt_i, .l1_rvalid_i, .l1_rdata_i
  );

  // ------------------------------------------------------------------ tile iteration helpers
  logic [7:0] n_kin_eff;
  assign n_kin_eff = (job.mode == MODE_DW) ? 8'd1 : job.n_kin;

  function automatic logic [31:0] in_tile_addr(nk_job_t j, logic [7:0] ko, logic [7:0] th,
                                               logic [7:0] tw, logic [7:0] ki);
    logic [7:0] kc;
    kc = (j.mode == MODE_DW) ? ko : ki;
    return j.in_base + 32'(th) * j.in_s_h + 32'(tw) * j.in_s_w + 32'(kc) * j.in_s_k;
  endfunction

  // ------------------------------------------------------------------ input buffers
  logic [1:0]                              buf_full_q;
  logic [1:0]                              buf_we;
  logic [PIX_W-1:0]                        buf_waddr;
  logic [1:0][N_PIX-1:0][255:0]            buf_tile;

  for (genvar b = 0; b < 2; b++) begin : g_buf
    nk_input_buffer #(.DEPTH(N_PIX), .WIDTH(256)) i_buf (
      .clk_i, .rst_ni, .we_i(buf_we[b]), .waddr_i(buf_waddr), .wdata_i(l1s_rdata), .tile_o(buf_tile[b])
    );
  end

  // ------------------------------------------------------------------ prefetcher
  typedef enum logic [1:0] {L_IDLE, L_WAIT, L_LOAD} lstate_e;
  lstate_e          lst_q;
  logic             lbuf_q;
  logic [7:0]       l_ko_q, l_th_q, l_tw_q, l_ki_q;
  logic [PIX_W-1:0] l_rcnt_q;
  logic             ag_in_start, ag_in_valid, ag_in_last;
  logic [31:0]      ag_in_addr;
  logic             job_start;
  logic             l_last_tile;

  nk_addrgen i_ag_in (
    .clk_i, .rst_ni, .start_i(ag_in_start),
    .base_i(in_tile_addr(job, l_ko_q, l_th_q, l_tw_q, l_ki_q)),
    .d0_i(job.in_d0), .d1_i(job.in_d1), .d2_i(32'd0),
    .len0_i(16'(IN_DIM)), .len1_i(16'(IN_DIM)), .len2_i(16'd1),
    .next_i(c1_gnt), .valid_o(ag_in_valid), .addr_o(ag_in_addr), .last_o(ag_in_last)
  );

  assign ag_in_start = (lst_q == L_WAIT) && !buf_full_q[lbuf_q];
  assign c1_req      = (lst_q == L_LOAD) && ag_in_valid;
  assign c1_addr     = ag_in_addr;
  assign buf_waddr   = l_rcnt_q;
  assign buf_we      = {c1_rvalid && lbuf_q, c1_rvalid && !lbuf_q};
  assign l_last_tile = (l_ki_q == n_kin_eff - 1) && (l_tw_q == job.n_w - 1) &&
                       (l_th_q == job.n_h - 1) && (l_ko_q == job.n_kout - 1);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      lst_q    <= L_IDLE;
      lbuf_q   <= 1'b0;
      {l_ko_q, l_th_q, l_tw_q, l_ki_q} <= '0;
      l_rcnt_q <= '0;
    end else begin
      unique case (lst_q)
        L_IDLE: if (job_start) begin
          lst_q  <= L_WAIT;
          lbuf_q <= 1'b0;
          {l_ko_q, l_th_q, l_tw_q, l_ki_q} <= '0;
        end
        L_WAIT: if (ag_in_start) begin
          lst_q    <= L_LOAD;
          l_rcnt_q <= '0;
        end
        L_LOAD: if (c1_rvalid) begin
          l_rcnt_q <= l_rcnt_q + 1;
          if (32'(l_rcnt_q) == N_PIX - 1) begin
            lbuf_q <= !lbuf_q;
            if (l_last_tile) lst_q <= L_IDLE;
            else begin
              lst_q <= L_WAIT;
              if (l_ki_q != n_kin_eff - 1) l_ki_q <= l_ki_q + 1;
              else begin
                l_ki_q <= '0;
                if (l_tw_q != job.n_w - 1) l_tw_q <= l_tw_q + 1;
                else begin
                  l_tw_q <= '0;
                  if (l_th_q != job.n_h - 1) l_th_q <= l_th_q + 1;
                  else begin
                    l_th_q <= '0;
                    l_ko_q <= l_ko_q + 1;
                  end
                end
              end
            end
          end
        end
        default: lst_q <= L_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------------ weight streamer
  logic         ws_start, ws_step, ws_done;
  logic [255:0] ws_wgt;
  logic [4:0]   ws_kout;
  logic [2:0]   ws_wbit;
  logic [31:0]  ws_base;
  logic [7:0]   m_ko_q, m_th_q, m_tw_q, m_ki_q;

  always_comb begin
    logic [31:0] words;
    unique case (job.mode)
      MODE_1X1: words = 32'd32;
      MODE_DW:  words = 32'(job.qw);
      default:  words = 32'(job.qw) << 5;
    endcase
    ws_base = job.w_base + (32'(m_ko_q) * 32'(n_kin_eff) + 32'(m_ki_q)) * words;
  end

  nk_weight_streamer i_ws (
    .clk_i, .rst_ni, .start_i(ws_start), .base_i(ws_base), .mode_i(job.mode), .qw_i(job.qw),
    .req_valid_o(w_req_valid_o), .req_addr_o(w_req_addr_o), .req_ready_i(w_req_ready_i),
    .resp_valid_i(w_resp_valid_i), .resp_data_i(w_resp_data_i),
    .step_o(ws_step), .wgt_o(ws_wgt), .kout_o(ws_kout), .wbit_o(ws_wbit), .done_o(ws_done)
  );

  // ------------------------------------------------------------------ main controller
  typedef enum logic [2:0] {M_IDLE, M_WAIT_BUF, M_EXEC, M_NORM_LD, M_NQ, M_STORE, M_DONE} mstate_e;
  mstate_e     mst_q;
  logic        mbuf_q;
  logic [2:0]  nl_issue_q, nl_rcnt_q;
  logic [5:0]  nq_ch_q;
  logic [31:0][7:0]  nq_scale_q;
  logic [31:0][7:0]  nq_shift_q;
  logic [31:0][31:0] nq_bias_q;
  logic        pe_clear, nq_en;
  logic [5:0]  n_ch;
  logic        m_last_tile;
  logic        ag_out_start, ag_out_valid, ag_out_last;
  logic [31:0] ag_out_addr;
  logic [$clog2(N_PE+1)-1:0] st_pe_q;
  logic [1:0]  st_beat_q;
  logic [31:0] out_tile_base, norm_addr;

  assign n_ch      = (job.mode == MODE_DW) ? 6'(NK_CH3X3) : 6'(COLS);
  assign job_start = (mst_q == M_IDLE) && job_valid;
  assign busy_o    = (mst_q != M_IDLE);
  assign ws_start  = (mst_q == M_WAIT_BUF) && buf_full_q[mbuf_q];
  assign pe_clear  = ws_start && (m_ki_q == 8'd0);
  assign nq_en     = (mst_q == M_NQ);
  assign m_last_tile = (m_tw_q == job.n_w - 1) && (m_th_q == job.n_h - 1) && (m_ko_q == job.n_kout - 1);
  assign out_tile_base = job.out_base + 32'(m_ko_q) * job.out_s_k + 32'(m_th_q) * job.out_s_h +
                         32'(m_tw_q) * job.out_s_w;
  assign norm_addr = job.norm_base + 32'(m_ko_q) * NK_NORM_BYTES + 32'(nl_issue_q) * 32;
  assign job_done  = (mst_q == M_DONE);
  assign evt_done_o = job_done;

  nk_addrgen i_ag_out (
    .clk_i, .rst_ni, .start_i(ag_out_start), .base_i(out_tile_base),
    .d0_i(32'd32), .d1_i(job.out_d0), .d2_i(job.out_d1),
    .len0_i(job.out32 ? 16'd4 : 16'd1), .len1_i(16'(PE_DIM)), .len2_i(16'(PE_DIM)),
    .next_i(c0_gnt && mst_q == M_STORE), .valid_o(ag_out_valid), .addr_o(ag_out_addr), .last_o(ag_out_last)
  );

  // PE array
  logic [N_PE-1:0][8:0][COLS-1:0][7:0] pe_act;
  logic [N_PE-1:0][COLS-1:0][31:0]     pe_acc;

  nk_dispatch #(.PE_DIM(PE_DIM), .COLS(COLS)) i_dispatch (
    .tile_i(mbuf_q ? buf_tile[1] : buf_tile[0]), .mode_i(job.mode), .pe_act_o(pe_act)
  );

  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    nk_pe #(.COLS(COLS)) i_pe (
      .clk_i, .rst_ni,
      .act_i(pe_act[p]), .wgt_i(ws_wgt), .step_i(ws_step), .mode_i(job.mode), .qw_i(job.qw),
      .kout_i(ws_kout), .wbit_i(ws_wbit), .clear_i(pe_clear),
      .nq_en_i(nq_en), .nq_ch_i(nq_ch_q[4:0]), .nq_scale_i(nq_scale_q[nq_ch_q[4:0]]),
      .nq_bias_i(nq_bias_q[nq_ch_q[4:0]]), .nq_shift_i(nq_shift_q[nq_ch_q[4:0]][4:0]),
      .acc_o(pe_acc[p])
    );
  end

  // output selector
  always_comb begin
    c0_wdata = '0;
    c0_be    = '0;
    for (int unsigned ch = 0; ch < 32; ch++) begin
      if (job.out32) begin
        if (ch < 8 && 32'(st_beat_q) * 8 + ch < 32'(n_ch)) begin
          c0_wdata[ch*32 +: 32] = pe_acc[st_pe_q][32'(st_beat_q)*8 + ch];
          c0_be[ch*4 +: 4]      = 4'hf;
        end
      end else if (ch < 32'(n_ch)) begin
        c0_wdata[ch*8 +: 8] = pe_acc[st_pe_q][ch][7:0];
        c0_be[ch]           = 1'b1;
      end
    end
  end

  assign c0_req  = ((mst_q == M_NORM_LD) && nl_issue_q < 3'd6) || ((mst_q == M_STORE) && ag_out_valid);
  assign c0_we   = (mst_q == M_STORE);
  assign c0_addr = (mst_q == M_STORE) ? ag_out_addr : norm_addr;
  assign ag_out_start = ((mst_q == M_NQ) && (32'(nq_ch_q) == 32'(n_ch) - 1)) ||
                        ((mst_q == M_EXEC) && ws_done && (m_ki_q == n_kin_eff - 1) && job.out32);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mst_q      <= M_IDLE;
      mbuf_q     <= 1'b0;
      buf_full_q <= '0;
      {m_ko_q, m_th_q, m_tw_q, m_ki_q} <= '0;
      nl_issue_q <= '0;
      nl_rcnt_q  <= '0;
      nq_ch_q    <= '0;
      nq_scale_q <= '0;
      nq_shift_q <= '0;
      nq_bias_q  <= '0;
      st_pe_q    <= '0;
      st_beat_q  <= '0;
    end else begin
      // input buffer bookkeeping
      if (c1_rvalid && 32'(l_rcnt_q) == N_PIX - 1) buf_full_q[lbuf_q] <= 1'b1;
      if (mst_q == M_EXEC && ws_done)              buf_full_q[mbuf_q] <= 1'b0;

      unique case (mst_q)
        M_IDLE: if (job_start) begin
          mst_q  <= M_WAIT_BUF;
          mbuf_q <= 1'b0;
          {m_ko_q, m_th_q, m_tw_q, m_ki_q} <= '0;
        end
        M_WAIT_BUF: if (ws_start) mst_q <= M_EXEC;
        M_EXEC: if (ws_done) begin
          mbuf_q <= !mbuf_q;
          if (m_ki_q == n_kin_eff - 1) begin
            m_ki_q     <= '0;
            nl_issue_q <= '0;
            nl_rcnt_q  <= '0;
            st_pe_q    <= '0;
            st_beat_q  <= '0;
            mst_q      <= job.out32 ? M_STORE : M_NORM_LD;
          end else begin
            m_ki_q <= m_ki_q + 1;
            mst_q  <= M_WAIT_BUF;
          end
        end
        M_NORM_LD: begin
          if (c0_gnt) nl_issue_q <= nl_issue_q + 1;
          if (c0_rvalid) begin
            nl_rcnt_q <= nl_rcnt_q + 1;
            for (int unsigned i = 0; i < 32; i++) begin
              if (nl_rcnt_q == 3'd0) nq_scale_q[i] <= l1s_rdata[i*8 +: 8];
              if (nl_rcnt_q == 3'd1) nq_shift_q[i] <= l1s_rdata[i*8 +: 8];
              if (i < 8 && nl_rcnt_q >= 3'd2) nq_bias_q[(32'(nl_rcnt_q) - 2) * 8 + i] <= l1s_rdata[i*32 +: 32];
            end
            if (nl_rcnt_q == 3'd5) begin
              nq_ch_q <= '0;
              mst_q   <= M_NQ;
            end
          end
        end
        M_NQ: begin
          nq_ch_q <= nq_ch_q + 1;
          if (32'(nq_ch_q) == 32'(n_ch) - 1) mst_q <= M_STORE;
        end
        M_STORE: if (c0_gnt) begin
          if (job.out32 && st_beat_q != 2'd3) st_beat_q <= st_beat_q + 1;
          else begin
            st_beat_q <= '0;
            st_pe_q   <= st_pe_q + 1;
          end
          if (ag_out_last) begin
            if (m_last_tile) mst_q <= M_DONE;
            else begin
              mst_q <= M_WAIT_BUF;
              if (m_tw_q != job.n_w - 1) m_tw_q <= m_tw_q + 1;
              else begin
                m_tw_q <= '0;
                if (m_th_q != job.n_h - 1) m_th_q <= m_th_q + 1;
                else begin
                  m_th_q <= '0;
                  m_ko_q <= m_ko_q + 1;
                end
              end
            end
          end
        end
        M_DONE: mst_q <= M_IDLE;
        default: mst_q <= M_IDLE;
      endcase
    end
  end

  // A weight response only ever arrives while a tile executes.
  assert property (@(posedge clk_i) disable iff (!rst_ni) w_resp_valid_i |-> mst_q == M_EXEC);
endmodule
