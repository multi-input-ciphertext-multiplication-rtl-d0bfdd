// bconv: fast RNS basis conversion of one coefficient, used both as BConv
// (ModUp, basis Q -> P) and as scBConv (ModDown with P^-1 folded in,
// basis P -> Q).
//
//   t_j = [x_j * c1_j]_{qi_j}                       LI multipliers
//   y_i = [ sum_j [t_j * c2_ij]_{po_i} ]_{po_i}      LI*LO multipliers
// BConv:   c1_j = (Q/q_j)^-1 mod q_j,   c2_ij = (Q/q_j) mod p_i
// scBConv: c1_i = (P/p_i)^-1 mod p_i,   c2_ji = p_i^-1  mod q_j
// (the second form equals P^-1 * BConv, so ModDown needs no separate P^-1
// multiplier). Both ranks use Barrett multipliers with the output modulus;
// t_j may exceed po_i, which the Barrett unit allows. The modular sum of the
// LI products is one registered stage (a tree of modular adders).
// Latency: 7 cycles (BCONV_LAT). Constants are static configuration.
//
// Follows the paper: the BConv formula, the scaled variant with P^-1 folded
// into its constants, and the 7-clock latency of its complexity table. This
// design's choice: one unit per coefficient lane and a one-stage modular sum.
module bconv #(
  parameter int unsigned W  = 64,
  parameter int unsigned LI = 24,
  parameter int unsigned LO = 24
) (
  input  logic         clk,
  input  logic [W-1:0] x   [LI],
  input  logic [W-1:0] qi  [LI],
  input  logic [W:0]   mui [LI],
  input  logic [W-1:0] c1  [LI],
  input  logic [W-1:0] po  [LO],
  input  logic [W:0]   muo [LO],
  input  logic [W-1:0] c2  [LO][LI],
  output logic [W-1:0] y   [LO]
);
  `include "modarith.svh"

  logic [W-1:0] t [LI];
  logic [W-1:0] u [LO][LI];

  for (genvar j = 0; j < LI; j++) begin : g_in
    modmul #(.W(W)) u_mm (.clk, .a(x[j]), .b(c1[j]), .q(qi[j]), .mu(mui[j]), .y(t[j]));
  end

  for (genvar i = 0; i < LO; i++) begin : g_out
    for (genvar j = 0; j < LI; j++) begin : g_term
      modmul #(.W(W)) u_mm (.clk, .a(t[j]), .b(c2[i][j]), .q(po[i]), .mu(muo[i]), .y(u[i][j]));
    end
    always_ff @(posedge clk) begin
      logic [W-1:0] acc;
      acc = '0;
      for (int j = 0; j < LI; j++) acc = f_madd(acc, u[i][j], po[i]);
      y[i] <= acc;
    end
  end
endmodule
