// nk_addrgen: three-dimensional strided address generator of the N-EUREKA streamers.
//
// After start_i (which loads base, strides and lengths) the generator presents
// addr_o = base + i0*d0 + i1*d1 + i2*d2 with i0 innermost, for i0 < len0, i1 < len1, i2 < len2.
// Each next_i advances to the following address; last_o marks the final address of the pattern
// and valid_o stays high until that address has been consumed. Lengths are at least 1.
// One address per cycle; no multiplier (running sums).
//
// The three-dimensional strided pattern is as published; the interface is this design's choice.
module nk_addrgen (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        start_i,
  input  logic [31:0] base_i,
  input  logic [31:0] d0_i,
  input  logic [31:0] d1_i,
  input  logic [31:0] d2_i,
  input  logic [15:0] len0_i,
  input  logic [15:0] len1_i,
  input  logic [15:0] len2_i,
  input  logic        next_i,
  output logic        valid_o,
  output logic [31:0] addr_o,
  output logic        last_o
);
  logic [31:0] a0_q, a1_q, a2_q, d0_q, d1_q, d2_q;
  logic [15:0] i0_q, i1_q, i2_q, l0_q, l1_q, l2_q;
  logic        valid_q;

  assign valid_o = valid_q;
  assign addr_o  = a0_q;
  assign last_o  = valid_q && (i0_q == l0_q - 1) && (i1_q == l1_q - 1) && (i2_q == l2_q - 1);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      {a0_q, a1_q, a2_q, d0_q, d1_q, d2_q} <= '0;
      {i0_q, i1_q, i2_q, l0_q, l1_q, l2_q} <= '0;
      valid_q <= 1'b0;
    end else if (start_i) begin
      a0_q <= base_i; a1_q <= base_i; a2_q <= base_i;
      d0_q <= d0_i; d1_q <= d1_i; d2_q <= d2_i;
      l0_q <= len0_i; l1_q <= len1_i; l2_q <= len2_i;
      i0_q <= '0; i1_q <= '0; i2_q <= '0;
      valid_q <= 1'b1;
    end else if (next_i && valid_q) begin
      if (last_o) begin
        valid_q <= 1'b0;
      end else if (i0_q != l0_q - 1) begin
        i0_q <= i0_q + 1;
        a0_q <= a0_q + d0_q;
      end else if (i1_q != l1_q - 1) begin
        i0_q <= '0;
        i1_q <= i1_q + 1;
        a0_q <= a1_q + d1_q;
        a1_q <= a1_q + d1_q;
      end else begin
        i0_q <= '0;
        i1_q <= '0;
        i2_q <= i2_q + 1;
        a0_q <= a2_q + d2_q;
        a1_q <= a2_q + d2_q;
        a2_q <= a2_q + d2_q;
      end
    end
  end
endmodule
