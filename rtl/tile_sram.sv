// tile_sram: the 4 MiB SRAM tile memory of the Neural Memory Subsystem.
//
// Four banks of BANK_WORDS 64-bit words (1 MiB each by default). 64-bit words are interleaved
// over the banks, so a 256-bit line is one word of each bank in the same row. Two ports share the
// banks: the wide read port toward N-EUREKA (ne_req_i, one line per cycle) and the 64-bit cluster
// port. N-EUREKA has priority; a cluster access is granted (bus_gnt_o) in a cycle without an
// N-EUREKA read. Both ports return read data in the cycle after the access; the cluster port also
// acknowledges writes with bus_rvalid_o.
//
// Size and use (feature-map tiles, or a second weight page) are as published; the bank
// interleaving and port priority are this design's choices.
module tile_sram #(
  parameter int unsigned BANK_WORDS = 131072,
  localparam int unsigned ROW_W     = $clog2(BANK_WORDS)
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              ne_req_i,
  input  logic [ROW_W-1:0]  ne_line_i,
  output logic [255:0]      ne_rdata_o,
  input  logic              bus_req_i,
  input  logic              bus_we_i,
  input  logic [ROW_W+1:0]  bus_word_i,
  input  logic [63:0]       bus_wdata_i,
  output logic              bus_gnt_o,
  output logic              bus_rvalid_o,
  output logic [63:0]       bus_rdata_o
);
  logic [63:0] mem0 [BANK_WORDS];
  logic [63:0] mem1 [BANK_WORDS];
  logic [63:0] mem2 [BANK_WORDS];
  logic [63:0] mem3 [BANK_WORDS];
  logic [3:0][63:0] rd_q;
  logic [1:0]       bus_bank_q;
  logic [ROW_W-1:0] row;
  logic [1:0]       bus_bank;
  logic             bus_wr;

  assign bus_gnt_o = bus_req_i && !ne_req_i;
  assign bus_bank  = bus_word_i[1:0];
  assign row       = ne_req_i ? ne_line_i : bus_word_i[ROW_W+1:2];
  assign bus_wr    = bus_gnt_o && bus_we_i;

  always_ff @(posedge clk_i) begin
    if (bus_wr && bus_bank == 2'd0) mem0[row] <= bus_wdata_i;
    if (bus_wr && bus_bank == 2'd1) mem1[row] <= bus_wdata_i;
    if (bus_wr && bus_bank == 2'd2) mem2[row] <= bus_wdata_i;
    if (bus_wr && bus_bank == 2'd3) mem3[row] <= bus_wdata_i;
    if (ne_req_i || (bus_gnt_o && !bus_we_i)) begin
      rd_q[0] <= mem0[row];
      rd_q[1] <= mem1[row];
      rd_q[2] <= mem2[row];
      rd_q[3] <= mem3[row];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      bus_rvalid_o <= 1'b0;
      bus_bank_q   <= '0;
    end else begin
      bus_rvalid_o <= bus_gnt_o;
      bus_bank_q   <= bus_bank;
    end
  end

  assign ne_rdata_o  = rd_q;
  assign bus_rdata_o = rd_q[bus_bank_q];
endmodule
