// rs_star: the last rescaling of a multiplier (RS*): one coefficient-domain
// rescaling step (rs) followed by NTT_{q_j} on each remaining channel, so
// that the product leaves the multiplier in the NTT domain again.
//   out_j = NTT_{q_j}( [ q_{LIN-1}^-1 (c_j - c_{LIN-1}) ]_{q_j} ),  j < LIN-1
// Latency 4 + ntt_lat(N). Twiddle bus: tw_we with tw_inv = 0 loads the
// forward transform of channel j from tw_q[j].
//
// Follows the paper's RS* (rs followed by NTT); the paper's rescaling
// latency is one clock longer than rs plus RS* here.
module rs_star #(
  parameter int unsigned N   = 65536,
  parameter int unsigned W   = 64,
  parameter int unsigned LIN = 23
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [W-1:0]         q    [LIN-1],
  input  logic [W:0]           mu   [LIN-1],
  input  logic [W-1:0]         qinv [LIN-1],
  input  logic                 tw_we,
  input  logic                 tw_inv,
  input  logic [$clog2(N)-1:0] tw_addr,
  input  logic [W-1:0]         tw_q [LIN-1],
  input  logic                 in_valid,
  input  logic                 in_sof,
  input  logic [W-1:0]         din  [LIN][2],
  output logic                 out_valid,
  output logic                 out_sof,
  output logic [W-1:0]         dout [LIN-1][2]
);
  logic         rv, rf;
  logic [W-1:0] r  [LIN-1][2];
  logic         nv [LIN-1];
  logic         nf [LIN-1];

  rs #(.W(W), .LIN(LIN)) u_rs (
    .clk, .rst_n, .q, .mu, .qinv, .in_valid, .in_sof, .din,
    .out_valid(rv), .out_sof(rf), .dout(r));

  for (genvar j = 0; j < LIN - 1; j++) begin : g_ntt
    ntt #(.N(N), .W(W)) u_ntt (
      .clk, .rst_n, .q(q[j]), .mu(mu[j]),
      .tw_we(tw_we && !tw_inv), .tw_addr, .tw_data(tw_q[j]),
      .in_valid(rv), .in_sof(rf), .in0(r[j][0]), .in1(r[j][1]),
      .out_valid(nv[j]), .out_sof(nf[j]), .out0(dout[j][0]), .out1(dout[j][1]));
  end
  assign out_valid = nv[0];
  assign out_sof   = nf[0];
endmodule
