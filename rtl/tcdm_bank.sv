// tcdm_bank: one bank of the cluster's shared L1 memory (TCDM).
//
// A single-port 32-bit SRAM of WORDS words (16 KiB by default) with byte enables. A request
// (req_i) is served in the cycle it is presented: a write updates the enabled bytes at the rising
// edge, a read returns the word in rdata_o during the next cycle. rdata_o holds its value until
// the next read.
//
// Bank size and width and single-cycle access are as published; the model is a plain array in
// place of the SRAM macro.
module tcdm_bank #(
  parameter int unsigned WORDS = 4096,
  parameter int unsigned DW    = 32
) (
  input  logic                     clk_i,
  input  logic                     req_i,
  input  logic                     we_i,
  input  logic [$clog2(WORDS)-1:0] addr_i,
  input  logic [DW/8-1:0]          be_i,
  input  logic [DW-1:0]            wdata_i,
  output logic [DW-1:0]            rdata_o
);
  logic [DW-1:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int unsigned b = 0; b < DW/8; b++)
          if (be_i[b]) mem[addr_i][b*8 +: 8] <= wdata_i[b*8 +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end
endmodule
