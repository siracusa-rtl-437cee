// tcdm_log_xbar: logarithmic branch of the heterogeneous L1 interconnect.
//
// Connects N_MST 32-bit masters (eight cores, the cluster DMA and the external port by default)
// to N_BANKS word-interleaved banks: byte address bits [BANK_BITS+1:2] select the bank, the bits
// above select the row. Every bank has its own round-robin arbiter among the masters that address
// it. The bank requests leave through bank_*_o; bank_gnt_i (from the conflict manager) says
// whether the logarithmic branch got the bank this cycle. A master's gnt_o is the combinational
// grant; rvalid_o and rdata_o follow one cycle later for reads and writes alike.
//
// Word interleaving over 16 banks, per-bank round-robin and single-cycle access are as published;
// the port protocol is this design's choice.
module tcdm_log_xbar #(
  parameter int unsigned N_MST     = 10,
  parameter int unsigned N_BANKS   = 16,
  parameter int unsigned ROW_W     = 12
) (
  input  logic                                 clk_i,
  input  logic                                 rst_ni,
  input  logic [N_MST-1:0]                     req_i,
  input  logic [N_MST-1:0][31:0]               addr_i,
  input  logic [N_MST-1:0]                     we_i,
  input  logic [N_MST-1:0][3:0]                be_i,
  input  logic [N_MST-1:0][31:0]               wdata_i,
  output logic [N_MST-1:0]                     gnt_o,
  output logic [N_MST-1:0]                     rvalid_o,
  output logic [N_MST-1:0][31:0]               rdata_o,
  output logic [N_BANKS-1:0]                   bank_req_o,
  output logic [N_BANKS-1:0][ROW_W-1:0]        bank_addr_o,
  output logic [N_BANKS-1:0]                   bank_we_o,
  output logic [N_BANKS-1:0][3:0]              bank_be_o,
  output logic [N_BANKS-1:0][31:0]             bank_wdata_o,
  input  logic [N_BANKS-1:0]                   bank_gnt_i,
  input  logic [N_BANKS-1:0][31:0]             bank_rdata_i
);
  localparam int unsigned BANK_BITS = $clog2(N_BANKS);
  localparam int unsigned MIDX_W    = $clog2(N_MST);

  logic [N_BANKS-1:0][N_MST-1:0]  bank_mreq, bank_mgnt;
  logic [N_BANKS-1:0][MIDX_W-1:0] bank_widx;
  logic [N_MST-1:0][BANK_BITS-1:0] mst_bank, mst_bank_q;

  always_comb begin
    for (int unsigned m = 0; m < N_MST; m++) mst_bank[m] = addr_i[m][BANK_BITS+1:2];
    for (int unsigned b = 0; b < N_BANKS; b++)
      for (int unsigned m = 0; m < N_MST; m++)
        bank_mreq[b][m] = req_i[m] && (32'(mst_bank[m]) == b);
  end

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    rr_arbiter #(.N(N_MST)) i_arb (
      .clk_i, .rst_ni, .req_i(bank_mreq[b]), .advance_i(bank_gnt_i[b]),
      .gnt_o(bank_mgnt[b]), .idx_o(bank_widx[b])
    );
    assign bank_req_o[b]   = |bank_mreq[b];
    assign bank_addr_o[b]  = addr_i[bank_widx[b]][BANK_BITS+2 +: ROW_W];
    assign bank_we_o[b]    = we_i[bank_widx[b]];
    assign bank_be_o[b]    = be_i[bank_widx[b]];
    assign bank_wdata_o[b] = wdata_i[bank_widx[b]];
  end

  always_comb begin
    for (int unsigned m = 0; m < N_MST; m++) begin
      gnt_o[m] = 1'b0;
      for (int unsigned b = 0; b < N_BANKS; b++)
        if (bank_mgnt[b][m] && bank_gnt_i[b]) gnt_o[m] = 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_o   <= '0;
      mst_bank_q <= '0;
    end else begin
      rvalid_o   <= gnt_o;
      mst_bank_q <= mst_bank;
    end
  end

  always_comb
    for (int unsigned m = 0; m < N_MST; m++) rdata_o[m] = bank_rdata_i[mst_bank_q[m]];

  // a bank grant is only given to a bank that is requested
  assert property (@(posedge clk_i) disable iff (!rst_ni) (bank_gnt_i & ~bank_req_o) == '0);
endmodule
