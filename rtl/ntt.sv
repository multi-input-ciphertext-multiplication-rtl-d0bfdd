// ntt: 2-parallel fully pipelined negacyclic number theoretic transform
// over Z_q[x]/(x^N+1), A = NTT_q(a).
//
// log2(N) butterfly ranks (ntt_pe, forward) are chained through
// delay-commutators. Rank s pairs array indices j and j + N/2^(s+1) and uses
// the twiddle psi_rev[2^s + (j >> (log2N - s))], psi being a primitive 2N-th
// root of unity mod q and psi_rev[k] = psi^bitrev(k); rank s therefore holds a
// twiddle memory of 2^s words.
// Stream format (two coefficients per clock, one frame = N/2 cycles):
//   input  cycle c : (a[c], a[c + N/2])       coefficient ("standard") order
//   output cycle c : (A[2c], A[2c+1])         A in bit-reversed order
// which is exactly the input format of the intt module, so the product of two
// transforms can be formed element by element and transformed back without
// any reordering buffer. Latency: N/2 - 1 + 5 log2 N cycles (he_pkg::ntt_lat).
// Twiddles are loaded through tw_we/tw_addr/tw_data: address k (1..N-1)
// receives psi_rev[k] and lands in the memory of rank floor(log2 k).
// q and mu (Barrett constant) are static. Frames must follow back to back or
// be separated by at least N/4 idle cycles.
//
// Follows the paper: 2-parallel pipelined NTT, log2 N PEs of five stages,
// a 2^s-word twiddle memory in stage s, cyclic delay memories. This
// design's choices: the stream order, the switch schedule and the load bus.
module ntt #(
  parameter int unsigned N = 65536,
  parameter int unsigned W = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [W-1:0]         q,
  input  logic [W:0]           mu,
  input  logic                 tw_we,
  input  logic [$clog2(N)-1:0] tw_addr,
  input  logic [W-1:0]         tw_data,
  input  logic                 in_valid,
  input  logic                 in_sof,
  input  logic [W-1:0]         in0,
  input  logic [W-1:0]         in1,
  output logic                 out_valid,
  output logic                 out_sof,
  output logic [W-1:0]         out0,
  output logic [W-1:0]         out1
);
  localparam int unsigned S  = $clog2(N);
  localparam int unsigned CW = S - 1;

  // stream entering rank s
  logic         v   [S+1];
  logic         f   [S+1];
  logic [W-1:0] d0  [S+1];
  logic [W-1:0] d1  [S+1];

  assign v[0]  = in_valid;
  assign f[0]  = in_sof;
  assign d0[0] = in0;
  assign d1[0] = in1;

  for (genvar s = 0; s < S; s++) begin : g_rank
    logic         pv, pf;
    logic [W-1:0] p0, p1;
    logic         we;
    assign we = tw_we && (tw_addr >> s) == 1;
    ntt_pe #(.W(W), .CW(CW), .TW_DEPTH(1 << s), .SHIFT(S - 1 - s), .INV(1'b0)) u_pe (
      .clk, .rst_n, .q, .mu,
      .tw_we(we), .tw_addr(tw_addr ^ (CW+1)'(1 << s)), .tw_data,
      .in_valid(v[s]), .in_sof(f[s]), .x0(d0[s]), .x1(d1[s]),
      .out_valid(pv), .out_sof(pf), .y0(p0), .y1(p1));
    if (s < S - 1) begin : g_com
      commutator #(.W(W), .CW(CW), .Q(S - 2 - s)) u_com (
        .clk, .rst_n, .in_valid(pv), .in_sof(pf), .x0(p0), .x1(p1),
        .out_valid(v[s+1]), .out_sof(f[s+1]), .y0(d0[s+1]), .y1(d1[s+1]));
    end else begin : g_last
      assign v[s+1]  = pv;
      assign f[s+1]  = pf;
      assign d0[s+1] = p0;
      assign d1[s+1] = p1;
    end
  end

  assign out_valid = v[S];
  assign out_sof   = f[S];
  assign out0      = d0[S];
  assign out1      = d1[S];
endmodule
