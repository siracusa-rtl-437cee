// rr_arbiter: round-robin arbiter.
//
// Grants one of N requesters per cycle (one-hot gnt_o, index idx_o). The search starts at the
// requester after the last one granted, so every requester is served within N grants. The
// pointer moves only when the grant is taken (advance_i), so a grant that is not used keeps its
// priority. Combinational grant, pointer updated at the rising edge.
module rr_arbiter #(
  parameter int unsigned N = 10
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [N-1:0]         req_i,
  input  logic                 advance_i,
  output logic [N-1:0]         gnt_o,
  output logic [$clog2(N)-1:0] idx_o
);
  logic [$clog2(N)-1:0] ptr_q;

  always_comb begin
    gnt_o = '0;
    idx_o = '0;
    for (int unsigned k = N; k > 0; k--) begin
      // later iterations override earlier ones, so the first requester at or after ptr wins
      int unsigned i;
      i = (32'(ptr_q) + k - 1) % N;
      if (req_i[i]) begin
        gnt_o = '0;
        gnt_o[i] = 1'b1;
        idx_o = ($clog2(N))'(i);
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                      ptr_q <= '0;
    else if (advance_i && |req_i)     ptr_q <= ($clog2(N))'((32'(idx_o) + 1) % N);
  end
endmodule
