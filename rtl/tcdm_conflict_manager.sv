// tcdm_conflict_manager: arbitration between the two branches of the heterogeneous L1
// interconnect and the bank multiplexers.
//
// Every cycle the requests of the logarithmic branch (one per bank) and of the shallow branch
// (N-EUREKA's wide access, all of whose banks must be granted together) are compared. Without a
// common bank both are served. On a conflict the branch selected by prio_shallow_i wins, unless
// the other branch has already lost max_stall_i consecutive conflicts: then the other branch wins
// once and its counter restarts. This gives the preferred branch the bandwidth it asks for while
// guaranteeing the other branch at least one access in every max_stall_i+1 conflicts. The
// shallow branch, when it wins, takes all its banks; the logarithmic branch keeps its banks
// outside the shallow access. The winner of each bank drives the bank port. Combinational grants,
// counters updated at the rising edge.
//
// The programmable priority without starvation between the branches is as published; the
// consecutive-loss counter is this design's way to bound starvation.
module tcdm_conflict_manager #(
  parameter int unsigned N_BANKS = 16,
  parameter int unsigned ROW_W   = 12
) (
  input  logic                           clk_i,
  input  logic                           rst_ni,
  input  logic                           prio_shallow_i,
  input  logic [7:0]                     max_stall_i,
  // logarithmic branch
  input  logic [N_BANKS-1:0]             log_req_i,
  input  logic [N_BANKS-1:0][ROW_W-1:0]  log_addr_i,
  input  logic [N_BANKS-1:0]             log_we_i,
  input  logic [N_BANKS-1:0][3:0]        log_be_i,
  input  logic [N_BANKS-1:0][31:0]       log_wdata_i,
  output logic [N_BANKS-1:0]             log_gnt_o,
  // shallow branch
  input  logic [N_BANKS-1:0]             sh_req_i,
  input  logic [N_BANKS-1:0][ROW_W-1:0]  sh_addr_i,
  input  logic                           sh_we_i,
  input  logic [N_BANKS-1:0][3:0]        sh_be_i,
  input  logic [N_BANKS-1:0][31:0]       sh_wdata_i,
  output logic                           sh_gnt_o,
  // bank ports
  output logic [N_BANKS-1:0]             bank_req_o,
  output logic [N_BANKS-1:0][ROW_W-1:0]  bank_addr_o,
  output logic [N_BANKS-1:0]             bank_we_o,
  output logic [N_BANKS-1:0][3:0]        bank_be_o,
  output logic [N_BANKS-1:0][31:0]       bank_wdata_o,
  // observation
  output logic                           conflict_o
);
  logic [7:0] lost_q;      // consecutive conflicts lost by the non-preferred branch
  logic       sh_wins;

  assign conflict_o = |(log_req_i & sh_req_i);

  always_comb begin
    if (!conflict_o)          sh_wins = |sh_req_i;
    else if (lost_q >= max_stall_i) sh_wins = !prio_shallow_i;
    else                      sh_wins = prio_shallow_i;
  end

  assign sh_gnt_o  = sh_wins;
  assign log_gnt_o = sh_wins ? (log_req_i & ~sh_req_i) : log_req_i;

  always_comb begin
    for (int unsigned b = 0; b < N_BANKS; b++) begin
      if (sh_wins && sh_req_i[b]) begin
        bank_req_o[b]   = 1'b1;
        bank_addr_o[b]  = sh_addr_i[b];
        bank_we_o[b]    = sh_we_i;
        bank_be_o[b]    = sh_be_i[b];
        bank_wdata_o[b] = sh_wdata_i[b];
      end else begin
        bank_req_o[b]   = log_req_i[b];
        bank_addr_o[b]  = log_addr_i[b];
        bank_we_o[b]    = log_we_i[b];
        bank_be_o[b]    = log_be_i[b];
        bank_wdata_o[b] = log_wdata_i[b];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) lost_q <= '0;
    else if (conflict_o) begin
      if (sh_wins == prio_shallow_i) lost_q <= lost_q + 1;
      else                           lost_q <= '0;
    end
  end

  // the shallow access is atomic: granted for all its banks or for none
  assert property (@(posedge clk_i) disable iff (!rst_ni) sh_gnt_o |-> ((log_gnt_o & sh_req_i) == '0));
endmodule
