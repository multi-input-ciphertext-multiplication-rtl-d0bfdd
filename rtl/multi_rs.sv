// multi_rs: combined rescaling by the top MU moduli q_{L-MU}..q_{L-1} of an
// NTT-domain polynomial (the multi-RS algorithm), with MU inverse transforms
// and L-MU forward transforms instead of the L + (L-MU) of MU separate steps.
//
//   1. a_t = INTT_{q_t}(A_t) for the MU dropped channels t = L-MU..L-1
//   2. MU-1 rounds of coefficient-domain rescaling among those channels:
//      round u (1..MU-1) replaces a_t, t <= L-1-u, by
//      [q_{L-u}^-1 (a_t - a_{L-u})]_{q_t}; after the last round channel t
//      holds a_t^{L-1-t} (rescaled L-1-t times)
//   3. for every kept channel e < L-MU:
//      b_e   = sum_t g[e][t] * a_t^{L-1-t}  mod q_e,    B_e = NTT_{q_e}(b_e)
//      out_e = g[e][MU-1] * A_e - B_e       mod q_e
// with g[e][k] = (q_{L-MU} * ... * q_{L-MU+k})^-1 mod q_e and
// rsc[u][k] = q_{L-u}^-1 mod q_{L-MU+k} precomputed (k indexes the dropped
// channels from 0). A_e is delayed in a cyclic memory while the correction
// term is formed. Two coefficients per clock.
// Latency: ntt_lat + 4(MU-1) + 4 + ntt_lat + 1.
// Twiddle bus: tw_inv = 1 loads the MU inverse transforms (channels
// L-MU..L-1), tw_inv = 0 the L-MU forward ones, from tw_q[channel].
//
// Follows the paper's multi-RS algorithm and its 2-RS architecture
// figure; where that figure labels the INTT of channel L-2 with q_{L-1},
// this design uses the channel's own modulus q_{L-2}, as the algorithm
// text does. The delay memory and latency are this design's.
module multi_rs #(
  parameter int unsigned N  = 65536,
  parameter int unsigned W  = 64,
  parameter int unsigned L  = 24,
  parameter int unsigned MU = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [W-1:0]         q    [L],
  input  logic [W:0]           mu   [L],
  input  logic [W-1:0]         rsc  [MU][MU],
  input  logic [W-1:0]         g    [L-MU][MU],
  input  logic                 tw_we,
  input  logic                 tw_inv,
  input  logic [$clog2(N)-1:0] tw_addr,
  input  logic [W-1:0]         tw_q [L],
  input  logic                 in_valid,
  input  logic                 in_sof,
  input  logic [W-1:0]         din  [L][2],
  output logic                 out_valid,
  output logic                 out_sof,
  output logic [W-1:0]         dout [L-MU][2]
);
  import he_pkg::*;
  `include "modarith.svh"

  localparam int unsigned NL    = ntt_lat(N);
  localparam int unsigned RLAT  = 4 * (MU - 1);          // rescaling rounds
  localparam int unsigned SLAT  = MM_LAT + 1;            // products + sum
  localparam int unsigned DA    = NL + RLAT + SLAT + NL - MM_LAT;
  localparam int unsigned T0    = L - MU;

  // lvl[u][k][lane]: dropped channel T0+k after round u
  logic [W-1:0] lvl [MU][MU][2];
  logic         iv  [MU];
  logic         isf [MU];

  for (genvar k = 0; k < MU; k++) begin : g_intt
    intt #(.N(N), .W(W)) u_intt (
      .clk, .rst_n, .q(q[T0+k]), .mu(mu[T0+k]),
      .tw_we(tw_we && tw_inv), .tw_addr, .tw_data(tw_q[T0+k]),
      .in_valid, .in_sof, .in0(din[T0+k][0]), .in1(din[T0+k][1]),
      .out_valid(iv[k]), .out_sof(isf[k]), .out0(lvl[0][k][0]), .out1(lvl[0][k][1]));
  end

  for (genvar u = 1; u < MU; u++) begin : g_round
    for (genvar k = 0; k < MU; k++) begin : g_ch
      for (genvar b = 0; b < 2; b++) begin : g_lane
        if (k <= MU - 1 - u) begin : g_rs
          logic [W-1:0] diff;
          always_ff @(posedge clk)
            diff <= f_msub(lvl[u-1][k][b], f_mred(lvl[u-1][MU-u][b], q[T0+k]), q[T0+k]);
          modmul #(.W(W)) u_mm (.clk, .a(diff), .b(rsc[u][k]), .q(q[T0+k]), .mu(mu[T0+k]),
                                .y(lvl[u][k][b]));
        end else begin : g_pass
          logic [W-1:0] dl [4];
          always_ff @(posedge clk) begin
            dl[0] <= lvl[u-1][k][b];
            for (int i = 1; i < 4; i++) dl[i] <= dl[i-1];
          end
          assign lvl[u][k][b] = dl[3];
        end
      end
    end
  end
  // flags: INTT output -> rounds -> products/sum -> NTT
  logic [RLAT+SLAT:0] fv, fs;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fv <= '0;
      fs <= '0;
    end else begin
      fv <= {fv[RLAT+SLAT-1:0], iv[0]};
      fs <= {fs[RLAT+SLAT-1:0], isf[0]};
    end
  end

  logic         nv [L-MU];
  logic         nf [L-MU];

  for (genvar e = 0; e < L - MU; e++) begin : g_keep
    logic [W-1:0] bsum [2];
    logic [W-1:0] bt   [2];
    logic [W-1:0] ad   [2];
    logic [W-1:0] ga   [2];
    for (genvar b = 0; b < 2; b++) begin : g_lane
      logic [W-1:0] pr [MU];
      for (genvar k = 0; k < MU; k++) begin : g_prod
        modmul #(.W(W)) u_mm (.clk, .a(lvl[MU-1][k][b]), .b(g[e][k]), .q(q[e]), .mu(mu[e]),
                              .y(pr[k]));
      end
      always_ff @(posedge clk) begin
        logic [W-1:0] acc;
        acc = '0;
        for (int k = 0; k < MU; k++) acc = f_madd(acc, pr[k], q[e]);
        bsum[b] <= acc;
      end
      delay_line #(.WIDTH(W), .D(DA)) u_da (.clk, .rst_n, .din(din[e][b]), .dout(ad[b]));
      modmul #(.W(W)) u_ga (.clk, .a(ad[b]), .b(g[e][MU-1]), .q(q[e]), .mu(mu[e]), .y(ga[b]));
      always_ff @(posedge clk) dout[e][b] <= f_msub(ga[b], bt[b], q[e]);
    end
    ntt #(.N(N), .W(W)) u_ntt (
      .clk, .rst_n, .q(q[e]), .mu(mu[e]),
      .tw_we(tw_we && !tw_inv), .tw_addr, .tw_data(tw_q[e]),
      .in_valid(fv[RLAT+SLAT-1]), .in_sof(fs[RLAT+SLAT-1]), .in0(bsum[0]), .in1(bsum[1]),
      .out_valid(nv[e]), .out_sof(nf[e]), .out0(bt[0]), .out1(bt[1]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
    end else begin
      out_valid <= nv[0];
      out_sof   <= nf[0];
    end
  end
endmodule
