// modup: raises the modulus of an NTT-domain polynomial from Q = q_0..q_{L-1}
// to the key-switching basis P = p_0..p_{K-1}:
//   INTT_{q_j} (L transforms) -> BConv(q_j -> p_i) -> NTT_{p_i} (K transforms)
// The output holds only the K new residues; the L original residues are
// used unchanged by the caller. Two coefficients per clock; one bconv per
// lane. A final output register gives a latency of
// 2*ntt_lat(N) + BCONV_LAT + 1 cycles.
// Twiddle bus: tw_we with tw_inv = 1 loads the L inverse transforms from
// tw_q[j]; tw_inv = 0 loads the K forward transforms from tw_p[i]; tw_addr
// is the table index 1..N-1 (see ntt/intt).
//
// Follows the paper's ModUp architecture (INTT, BConv, NTT); the output
// register and the bus are this design's choice.
module modup #(
  parameter int unsigned N = 65536,
  parameter int unsigned W = 64,
  parameter int unsigned L = 24,
  parameter int unsigned K = 24
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [W-1:0]         q     [L],
  input  logic [W:0]           muq   [L],
  input  logic [W-1:0]         p     [K],
  input  logic [W:0]           mup   [K],
  input  logic [W-1:0]         bc_c1 [L],
  input  logic [W-1:0]         bc_c2 [K][L],
  input  logic                 tw_we,
  input  logic                 tw_inv,
  input  logic [$clog2(N)-1:0] tw_addr,
  input  logic [W-1:0]         tw_q  [L],
  input  logic [W-1:0]         tw_p  [K],
  input  logic                 in_valid,
  input  logic                 in_sof,
  input  logic [W-1:0]         din   [L][2],
  output logic                 out_valid,
  output logic                 out_sof,
  output logic [W-1:0]         dout  [K][2]
);
  import he_pkg::*;

  logic [W-1:0] a   [2][L];   // coefficient domain, per lane
  logic [W-1:0] b   [2][K];
  logic [W-1:0] nt  [K][2];
  logic         iv  [L];
  logic         isf [L];
  logic         bv, bs;
  logic         nv  [K];
  logic         ns  [K];

  for (genvar j = 0; j < L; j++) begin : g_intt
    intt #(.N(N), .W(W)) u_intt (
      .clk, .rst_n, .q(q[j]), .mu(muq[j]),
      .tw_we(tw_we && tw_inv), .tw_addr, .tw_data(tw_q[j]),
      .in_valid, .in_sof, .in0(din[j][0]), .in1(din[j][1]),
      .out_valid(iv[j]), .out_sof(isf[j]), .out0(a[0][j]), .out1(a[1][j]));
  end

  for (genvar l = 0; l < 2; l++) begin : g_bconv
    bconv #(.W(W), .LI(L), .LO(K)) u_bconv (
      .clk, .x(a[l]), .qi(q), .mui(muq), .c1(bc_c1), .po(p), .muo(mup), .c2(bc_c2), .y(b[l]));
  end

  logic [BCONV_LAT-1:0] fv, fs;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fv <= '0;
      fs <= '0;
    end else begin
      fv <= {fv[BCONV_LAT-2:0], iv[0]};
      fs <= {fs[BCONV_LAT-2:0], isf[0]};
    end
  end
  assign bv = fv[BCONV_LAT-1];
  assign bs = fs[BCONV_LAT-1];

  for (genvar i = 0; i < K; i++) begin : g_ntt
    ntt #(.N(N), .W(W)) u_ntt (
      .clk, .rst_n, .q(p[i]), .mu(mup[i]),
      .tw_we(tw_we && !tw_inv), .tw_addr, .tw_data(tw_p[i]),
      .in_valid(bv), .in_sof(bs), .in0(b[0][i]), .in1(b[1][i]),
      .out_valid(nv[i]), .out_sof(ns[i]), .out0(nt[i][0]), .out1(nt[i][1]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
    end else begin
      out_valid <= nv[0];
      out_sof   <= ns[0];
    end
  end
  always_ff @(posedge clk) dout <= nt;
endmodule
