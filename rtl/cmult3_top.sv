// cmult3_top: three-input ciphertext multiplier for RNS-CKKS
// (ct1 * ct2 * ct3 -> ct*), fully pipelined, two coefficients per clock.
//
//   pm3      polynomial products d0..d3 of the three ciphertexts (NTT domain)
//   relin3   relinearization of d2 (key ek2) and d3 (key ek3), merged ModDown;
//            result in the coefficient domain, L channels
//   rs       first rescaling (drop q_{L-1}) in the coefficient domain
//   rs_star  second rescaling (drop q_{L-2}) followed by NTT, so ct_out is
//            in the NTT domain again with L-2 channels
// The four products d0..d3 also feed four combined 2-level rescalers
// (multi_rs, MU = 2) that give grp_out: the product of a three-input group
// brought back to scale Delta, not relinearized, in the form a larger
// multiplier tree consumes from a three-input node.
//
// Stream format: one polynomial per channel is a frame of N/2 cycles; an NTT-
// domain frame carries (A[2c], A[2c+1]) of the bit-reversed array at cycle c.
// Frames follow back to back or with at least N/4 idle cycles between them.
// Latencies: ct_out 2N + 34 + 20 log2 N cycles after the input frame,
// grp_out 9 + 2*ntt_lat(N) + 9.
// Configuration (static while frames flow): moduli and Barrett constants,
// basis-conversion and rescaling constants, twiddle tables (twiddle bus),
// evaluation keys (key bus, component index i < K for EK^(i), K + j for the
// P^-1-scaled EVK^(K+j)).
//
// Follows the paper: the improved three-input datapath (PM, merged
// relinearization, coefficient-domain rs, RS*), its module counts and its
// total latency. This design's choices: streamed inputs instead of the input
// ciphertext buffer, configuration on ports, the load buses, and the
// grp_out path as a single use of the multi-RS algorithm.
module cmult3_top #(
  parameter int unsigned N = 65536,
  parameter int unsigned W = 64,
  parameter int unsigned L = 24,
  parameter int unsigned K = 24
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [W-1:0]         q        [L],
  input  logic [W:0]           muq      [L],
  input  logic [W-1:0]         p        [K],
  input  logic [W:0]           mup      [K],
  input  logic [W-1:0]         up_c1    [L],
  input  logic [W-1:0]         up_c2    [K][L],
  input  logic [W-1:0]         dn_c1    [K],
  input  logic [W-1:0]         dn_c2    [L][K],
  input  logic [W-1:0]         rs_qinv  [L-1],     // q_{L-1}^-1 mod q_j
  input  logic [W-1:0]         rss_qinv [L-2],     // q_{L-2}^-1 mod q_j
  input  logic [W-1:0]         mrs_rsc  [2][2],
  input  logic [W-1:0]         mrs_g    [L-2][2],
  input  logic                 tw_we,
  input  logic                 tw_inv,
  input  logic [$clog2(N)-1:0] tw_addr,
  input  logic [W-1:0]         tw_q     [L],
  input  logic [W-1:0]         tw_p     [K],
  input  logic                 key_we,
  input  logic [$clog2(N)-2:0] key_waddr,
  input  logic [W-1:0]         key_wdata [K+L][4][2],
  input  logic                 in_valid,
  input  logic                 in_sof,
  input  logic [W-1:0]         ct1      [2][L][2],
  input  logic [W-1:0]         ct2      [2][L][2],
  input  logic [W-1:0]         ct3      [2][L][2],
  output logic                 out_valid,
  output logic                 out_sof,
  output logic [W-1:0]         ct_out   [2][L-2][2],
  output logic                 grp_valid,
  output logic                 grp_sof,
  output logic [W-1:0]         grp_out  [4][L-2][2]
);
  logic         pv, ps;
  logic [W-1:0] d [4][L][2];

  pm3 #(.W(W), .L(L)) u_pm (
    .clk, .rst_n, .q, .mu(muq), .in_valid, .in_sof, .ct1, .ct2, .ct3,
    .out_valid(pv), .out_sof(ps), .d);

  logic         rv, rsf;
  logic [W-1:0] cs [2][L][2];
  relin3 #(.N(N), .W(W), .L(L), .K(K)) u_relin (
    .clk, .rst_n, .q, .muq, .p, .mup, .up_c1, .up_c2, .dn_c1, .dn_c2,
    .tw_we, .tw_inv, .tw_addr, .tw_q, .tw_p, .key_we, .key_waddr, .key_wdata,
    .in_valid(pv), .in_sof(ps), .d, .out_valid(rv), .out_sof(rsf), .c(cs));

  // channel subsets of the configuration for the two rescaling levels
  logic [W-1:0] q1 [L-1];
  logic [W:0]   m1 [L-1];
  logic [W-1:0] q2 [L-2];
  logic [W:0]   m2 [L-2];
  logic [W-1:0] t2 [L-2];
  always_comb begin
    for (int j = 0; j < L - 1; j++) begin
      q1[j] = q[j];
      m1[j] = muq[j];
    end
    for (int j = 0; j < L - 2; j++) begin
      q2[j] = q[j];
      m2[j] = muq[j];
      t2[j] = tw_q[j];
    end
  end

  logic         r1v [2];
  logic         r1s [2];
  logic [W-1:0] c1 [2][L-1][2];
  logic         r2v [2];
  logic         r2s [2];
  for (genvar l = 0; l < 2; l++) begin : g_rescale
    rs #(.W(W), .LIN(L)) u_rs (
      .clk, .rst_n, .q(q1), .mu(m1), .qinv(rs_qinv), .in_valid(rv), .in_sof(rsf),
      .din(cs[l]), .out_valid(r1v[l]), .out_sof(r1s[l]), .dout(c1[l]));
    rs_star #(.N(N), .W(W), .LIN(L-1)) u_rss (
      .clk, .rst_n, .q(q2), .mu(m2), .qinv(rss_qinv), .tw_we, .tw_inv, .tw_addr,
      .tw_q(t2), .in_valid(r1v[l]), .in_sof(r1s[l]), .din(c1[l]),
      .out_valid(r2v[l]), .out_sof(r2s[l]), .dout(ct_out[l]));
  end
  assign out_valid = r2v[0];
  assign out_sof   = r2s[0];

  logic gv [4];
  logic gs [4];
  for (genvar t = 0; t < 4; t++) begin : g_group
    multi_rs #(.N(N), .W(W), .L(L), .MU(2)) u_mrs (
      .clk, .rst_n, .q, .mu(muq), .rsc(mrs_rsc), .g(mrs_g), .tw_we, .tw_inv, .tw_addr,
      .tw_q, .in_valid(pv), .in_sof(ps), .din(d[t]),
      .out_valid(gv[t]), .out_sof(gs[t]), .dout(grp_out[t]));
  end
  assign grp_valid = gv[0];
  assign grp_sof   = gs[0];
endmodule
