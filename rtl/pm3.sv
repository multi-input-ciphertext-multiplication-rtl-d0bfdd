// pm3: polynomial multiplication of three ciphertexts in the NTT domain,
// giving the four polynomials of
//   (c0^1 + c1^1 s)(c0^2 + c1^2 s)(c0^3 + c1^3 s) = d0 + d1 s + d2 s^2 + d3 s^3.
// Two Karatsuba levels, 8 modular multipliers per coefficient:
//   level 1: F0 = c0^1 c0^2,  F2 = c1^1 c1^2,
//            P  = (c0^1 + c1^1)(c0^2 + c1^2),  F1 = P - F0 - F2
//   level 2: D0 = F0 c0^3,  D3 = F2 c1^3,  G = F1 c1^3,  H = F2 c0^3,
//            M  = (F0 + F1)(c0^3 + c1^3)  with F0 + F1 = P - F2,
//            D1 = M - D0 - G,  D2 = G + H
// Per RNS channel j (modulus q[j]) and per lane. Latency 9 cycles: input
// adders (1), level-1 multipliers (3), subtractions (1), level-2 multipliers
// (3), output adders (1). Flags follow the data.
//
// Follows the paper's two-level Karatsuba PM with 16L modular multipliers;
// the paper gives 8 clocks of PM latency, this design 9 (its rescaling is
// one clock shorter, so the total latency matches).
module pm3 #(
  parameter int unsigned W = 64,
  parameter int unsigned L = 24
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] q   [L],
  input  logic [W:0]   mu  [L],
  input  logic         in_valid,
  input  logic         in_sof,
  input  logic [W-1:0] ct1 [2][L][2],   // [poly c0/c1][channel][lane]
  input  logic [W-1:0] ct2 [2][L][2],
  input  logic [W-1:0] ct3 [2][L][2],
  output logic         out_valid,
  output logic         out_sof,
  output logic [W-1:0] d   [4][L][2]    // [d0..d3][channel][lane]
);
  `include "modarith.svh"
  localparam int unsigned LAT = 9;

  logic [LAT-1:0] fv, fs;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fv <= '0;
      fs <= '0;
    end else begin
      fv <= {fv[LAT-2:0], in_valid};
      fs <= {fs[LAT-2:0], in_sof};
    end
  end
  assign out_valid = fv[LAT-1];
  assign out_sof   = fs[LAT-1];

  for (genvar j = 0; j < L; j++) begin : g_ch
    for (genvar b = 0; b < 2; b++) begin : g_lane
      logic [W-1:0] a0, a1, b0, b1, sa, sb;           // stage 1
      logic [W-1:0] c0d [5], c1d [5], scd [5];        // ct3 aligned to stage 5
      logic [W-1:0] f0, f2, pp;                       // after level 1
      logic [W-1:0] r_f0, r_f2, r_f1, r_e;            // stage 5
      logic [W-1:0] m_d0, m_d3, m_g, m_h, m_m;        // after level 2

      always_ff @(posedge clk) begin
        a0 <= ct1[0][j][b];
        a1 <= ct1[1][j][b];
        b0 <= ct2[0][j][b];
        b1 <= ct2[1][j][b];
        sa <= f_madd(ct1[0][j][b], ct1[1][j][b], q[j]);
        sb <= f_madd(ct2[0][j][b], ct2[1][j][b], q[j]);
        c0d[0] <= ct3[0][j][b];
        c1d[0] <= ct3[1][j][b];
        scd[0] <= f_madd(ct3[0][j][b], ct3[1][j][b], q[j]);
        for (int k = 1; k < 5; k++) begin
          c0d[k] <= c0d[k-1];
          c1d[k] <= c1d[k-1];
          scd[k] <= scd[k-1];
        end
      end

      modmul #(.W(W)) u_f0 (.clk, .a(a0), .b(b0), .q(q[j]), .mu(mu[j]), .y(f0));
      modmul #(.W(W)) u_f2 (.clk, .a(a1), .b(b1), .q(q[j]), .mu(mu[j]), .y(f2));
      modmul #(.W(W)) u_p  (.clk, .a(sa), .b(sb), .q(q[j]), .mu(mu[j]), .y(pp));

      always_ff @(posedge clk) begin
        r_f0 <= f0;
        r_f2 <= f2;
        r_f1 <= f_msub(f_msub(pp, f0, q[j]), f2, q[j]);
        r_e  <= f_msub(pp, f2, q[j]);
      end

      modmul #(.W(W)) u_d0 (.clk, .a(r_f0), .b(c0d[4]), .q(q[j]), .mu(mu[j]), .y(m_d0));
      modmul #(.W(W)) u_d3 (.clk, .a(r_f2), .b(c1d[4]), .q(q[j]), .mu(mu[j]), .y(m_d3));
      modmul #(.W(W)) u_g  (.clk, .a(r_f1), .b(c1d[4]), .q(q[j]), .mu(mu[j]), .y(m_g));
      modmul #(.W(W)) u_h  (.clk, .a(r_f2), .b(c0d[4]), .q(q[j]), .mu(mu[j]), .y(m_h));
      modmul #(.W(W)) u_m  (.clk, .a(r_e),  .b(scd[4]), .q(q[j]), .mu(mu[j]), .y(m_m));

      always_ff @(posedge clk) begin
        d[0][j][b] <= m_d0;
        d[1][j][b] <= f_msub(f_msub(m_m, m_d0, q[j]), m_g, q[j]);
        d[2][j][b] <= f_madd(m_g, m_h, q[j]);
        d[3][j][b] <= m_d3;
      end
    end
  end
endmodule
