// nk_l1_streamer: L1 port of N-EUREKA.
//
// Two clients share the single 288-bit L1 access: client 0 is the controller (normalization
// parameter loads and output stores) and client 1 the input prefetcher. Client 0 has priority.
// A client asks for 256 bits (32 bytes) at any byte address. The streamer turns this into one
// access of nine contiguous 32-bit words starting with the word that holds the first byte:
// reads select the 256 relevant bits from the 288 returned, writes shift the data and the byte
// enables into place. The access is granted when the L1 side grants it (l1_gnt_i); read data
// arrive one cycle later and are returned to the client that issued the read (cX_rvalid_o).
//
// The 288-bit unaligned access with automatic selection of 256 bits and the time-division
// multiplexing of loads and stores are as published; client priority and the handshake are this
// design's choices.
module nk_l1_streamer #(
  parameter int unsigned BEAT_W = 256,
  parameter int unsigned L1_W   = 288
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  // client 0: controller
  input  logic                  c0_req_i,
  input  logic                  c0_we_i,
  input  logic [31:0]           c0_addr_i,
  input  logic [BEAT_W-1:0]     c0_wdata_i,
  input  logic [BEAT_W/8-1:0]   c0_be_i,
  output logic                  c0_gnt_o,
  output logic                  c0_rvalid_o,
  // client 1: input prefetch (read only)
  input  logic                  c1_req_i,
  input  logic [31:0]           c1_addr_i,
  output logic                  c1_gnt_o,
  output logic                  c1_rvalid_o,
  output logic [BEAT_W-1:0]     rdata_o,      // shared read data for both clients
  // L1 side (shallow interconnect)
  output logic                  l1_req_o,
  output logic                  l1_we_o,
  output logic [31:0]           l1_addr_o,    // word-aligned byte address of the first word
  output logic [L1_W/8-1:0]     l1_be_o,
  output logic [L1_W-1:0]       l1_wdata_o,
  input  logic                  l1_gnt_i,
  input  logic                  l1_rvalid_i,
  input  logic [L1_W-1:0]       l1_rdata_i
);
  logic        sel;       // 0: client 0, 1: client 1
  logic [31:0] addr;
  logic [1:0]  off_q;
  logic        rd_c0_q, rd_c1_q;

  assign sel       = !c0_req_i;
  assign addr      = sel ? c1_addr_i : c0_addr_i;
  assign l1_req_o  = c0_req_i || c1_req_i;
  assign l1_we_o   = !sel && c0_we_i;
  assign l1_addr_o = {addr[31:2], 2'b00};
  assign l1_wdata_o = L1_W'(c0_wdata_i) << (8 * addr[1:0]);
  assign l1_be_o    = l1_we_o ? (L1_W/8)'(c0_be_i) << addr[1:0] : '0;

  assign c0_gnt_o = c0_req_i && l1_gnt_i;
  assign c1_gnt_o = sel && c1_req_i && l1_gnt_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      off_q   <= '0;
      rd_c0_q <= 1'b0;
      rd_c1_q <= 1'b0;
    end else begin
      off_q   <= addr[1:0];
      rd_c0_q <= c0_gnt_o && !c0_we_i;
      rd_c1_q <= c1_gnt_o;
    end
  end

  assign rdata_o     = BEAT_W'(l1_rdata_i >> (8 * off_q));
  assign c0_rvalid_o = rd_c0_q && l1_rvalid_i;
  assign c1_rvalid_o = rd_c1_q && l1_rvalid_i;
endmodule
