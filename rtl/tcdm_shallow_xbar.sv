// tcdm_shallow_xbar: shallow branch of the heterogeneous L1 interconnect.
//
// Routes the single wide N-EUREKA port (N_WORDS = 9 words, 288 bits) to the word-interleaved
// banks without arbitration: word w of an access at word-aligned byte address A lives in bank
// ((A>>2)+w) mod N_BANKS, row ((A>>2)+w) / N_BANKS, so the nine words always fall in nine
// different, contiguous banks (wrapping around). The access is granted as a whole by the
// conflict manager (gnt_i); read data are reassembled in word order one cycle later.
//
// The contiguous-by-construction wide port without bank-wise arbitration is as published; the
// mapping details and the all-or-nothing grant are this design's choices.
module tcdm_shallow_xbar #(
  parameter int unsigned N_BANKS = 16,
  parameter int unsigned N_WORDS = 9,
  parameter int unsigned ROW_W   = 12
) (
  input  logic                            clk_i,
  input  logic                            rst_ni,
  input  logic                            req_i,
  input  logic                            we_i,
  input  logic [31:0]                     addr_i,
  input  logic [N_WORDS*4-1:0]            be_i,
  input  logic [N_WORDS*32-1:0]           wdata_i,
  input  logic                            gnt_i,
  output logic                            rvalid_o,
  output logic [N_WORDS*32-1:0]           rdata_o,
  output logic [N_BANKS-1:0]              bank_req_o,
  output logic [N_BANKS-1:0][ROW_W-1:0]   bank_addr_o,
  output logic                            bank_we_o,
  output logic [N_BANKS-1:0][3:0]         bank_be_o,
  output logic [N_BANKS-1:0][31:0]        bank_wdata_o,
  input  logic [N_BANKS-1:0][31:0]        bank_rdata_i
);
  localparam int unsigned BANK_BITS = $clog2(N_BANKS);

  logic [29:0]          waddr;
  logic [BANK_BITS-1:0] b0, b0_q;

  assign waddr     = addr_i[31:2];
  assign b0        = waddr[BANK_BITS-1:0];
  assign bank_we_o = we_i;

  always_comb begin
    for (int unsigned b = 0; b < N_BANKS; b++) begin
      int unsigned w;
      logic [29:0] wa;
      w  = (b + N_BANKS - 32'(b0)) % N_BANKS;
      wa = waddr + 30'(w);
      bank_req_o[b]   = req_i && (w < N_WORDS);
      bank_addr_o[b]  = wa[BANK_BITS +: ROW_W];
      bank_be_o[b]    = (w < N_WORDS) ? be_i[w*4 +: 4] : 4'b0;
      bank_wdata_o[b] = (w < N_WORDS) ? wdata_i[w*32 +: 32] : 32'b0;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_o <= 1'b0;
      b0_q     <= '0;
    end else begin
      rvalid_o <= req_i && gnt_i;
      b0_q     <= b0;
    end
  end

  always_comb
    for (int unsigned w = 0; w < N_WORDS; w++)
      rdata_o[w*32 +: 32] = bank_rdata_i[(32'(b0_q) + w) % N_BANKS];
endmodule
