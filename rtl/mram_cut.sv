// mram_cut: behavioural model of one 512 KiB STT-MRAM cut (a proprietary hard macro).
//
// The cut stores WORDS 64-bit words. It runs on the divided MRAM clock, modelled here as the
// cluster clock qualified by ce_i (isochronous clock enable). A read presented while ce_i is
// high enters a LAT-stage internal pipeline; its data appear on rdata_o (with rvalid_o) after LAT
// enabled edges and stay there until the pipeline advances again. A write updates the array at
// the enabled edge. The analog read time, the slow and endurance-limited write and the separate
// array supply of the real macro are not modelled.
//
// The 64-bit width, 512 KiB size and three internal pipeline cycles are as published.
module mram_cut #(
  parameter int unsigned WORDS = 65536,
  parameter int unsigned DW    = 64,
  parameter int unsigned LAT   = 3
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     ce_i,
  input  logic                     req_i,
  input  logic                     we_i,
  input  logic [$clog2(WORDS)-1:0] addr_i,
  input  logic [DW-1:0]            wdata_i,
  output logic                     rvalid_o,
  output logic [DW-1:0]            rdata_o
);
  logic [DW-1:0] mem [WORDS];
  logic [LAT-1:0]         vld_q;
  logic [LAT-1:0][DW-1:0] dat_q;

  always_ff @(posedge clk_i) begin
    if (ce_i && req_i && we_i) mem[addr_i] <= wdata_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      vld_q <= '0;
      dat_q <= '0;
    end else if (ce_i) begin
      vld_q[0] <= req_i && !we_i;
      dat_q[0] <= mem[addr_i];
      for (int unsigned s = 1; s < LAT; s++) begin
        vld_q[s] <= vld_q[s-1];
        dat_q[s] <= dat_q[s-1];
      end
    end
  end

  assign rvalid_o = vld_q[LAT-1];
  assign rdata_o  = dat_q[LAT-1];
endmodule
