// relin3: relinearization of the three-input product (d0, d1, d2, d3) back to
// two polynomials, with the ModDown merged into the key-switching sums.
//
// Q-path, per channel j (NTT domain in, coefficient domain out):
//   C_l^(j) = D_l + D2 * EVK2_l^(K+j) + D3 * EVK3_l^(K+j),   l = 0, 1
//   cq_l    = INTT_{q_j}(C_l)
// where EVK_t^(K+j) = P^-1 * ek_t^(K+j) mod q_j is stored pre-multiplied, so
// the addition of D_l happens before a single INTT per output.
// P-path, per channel i of P:
//   Dt~    = ModUp(D_t), t = 2, 3
//   Cp_l   = D2~ * EK2_l^(i) + D3~ * EK3_l^(i)
//   cp_l   = scBConv(INTT_{p_i}(Cp_l))  = P^-1 BConv(...)  (basis P -> Q)
// Output (coefficient domain): c*_l^(j) = cq_l^(j) - cp_l^(j) mod q_j.
// The q-path result waits in cyclic delay memories for the longer p-path.
// Keys live in one evk_mem per channel (index i < K: EK^(i); K + j: EVK^(K+j));
// each is read at the stream position of the data that meets it.
// Latency: 3*ntt_lat(N) + 21 = 1.5N + 18 + 15 log2 N cycles.
//
// Follows the paper: merged ModDown (single INTT after the key sums, P^-1
// folded into the keys and scBConv), module counts and latency. This
// design's choices: delay memories for the q-path, per-channel key
// memories and the key load bus. Only one INTT's frame flags are used; the
// other transforms' flag outputs are left open because they are identical.
module relin3 #(
  parameter int unsigned N = 65536,
  parameter int unsigned W = 64,
  parameter int unsigned L = 24,
  parameter int unsigned K = 24
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [W-1:0]         q       [L],
  input  logic [W:0]           muq     [L],
  input  logic [W-1:0]         p       [K],
  input  logic [W:0]           mup     [K],
  input  logic [W-1:0]         up_c1   [L],      // (Q/q_j)^-1 mod q_j
  input  logic [W-1:0]         up_c2   [K][L],   // (Q/q_j) mod p_i
  input  logic [W-1:0]         dn_c1   [K],      // (P/p_i)^-1 mod p_i
  input  logic [W-1:0]         dn_c2   [L][K],   // p_i^-1 mod q_j
  input  logic                 tw_we,
  input  logic                 tw_inv,
  input  logic [$clog2(N)-1:0] tw_addr,
  input  logic [W-1:0]         tw_q    [L],
  input  logic [W-1:0]         tw_p    [K],
  input  logic                 key_we,
  input  logic [$clog2(N)-2:0] key_waddr,
  input  logic [W-1:0]         key_wdata [K+L][4][2],
  input  logic                 in_valid,
  input  logic                 in_sof,
  input  logic [W-1:0]         d       [4][L][2],
  output logic                 out_valid,
  output logic                 out_sof,
  output logic [W-1:0]         c       [2][L][2]
);
  import he_pkg::*;
  `include "modarith.svh"

  localparam int unsigned S     = $clog2(N);
  localparam int unsigned NL    = ntt_lat(N);
  localparam int unsigned UPLAT = 2 * NL + BCONV_LAT + 1;
  localparam int unsigned DQ    = UPLAT + BCONV_LAT;

  // ---------------- q-path -----------------------------------------------
  logic [S-2:0] cq_cnt, cq_cur;
  logic         qv1, qs1;
  always_comb cq_cur = in_sof ? '0 : cq_cnt + 1'b1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cq_cnt <= '1;
      qv1    <= 1'b0;
      qs1    <= 1'b0;
    end else begin
      cq_cnt <= cq_cur;
      qv1    <= in_valid;
      qs1    <= in_sof;
    end
  end
  logic [MM_LAT:0] qfv, qfs;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qfv <= '0;
      qfs <= '0;
    end else begin
      qfv <= {qfv[MM_LAT-1:0], qv1};
      qfs <= {qfs[MM_LAT-1:0], qs1};
    end
  end

  logic [W-1:0] cq [2][L][2];      // q-path INTT outputs
  logic [W-1:0] cqd [2][L][2];     // delayed to meet the p-path

  for (genvar j = 0; j < L; j++) begin : g_q
    logic [W-1:0] key [4][2];
    logic [W-1:0] ct  [2][2];
    evk_mem #(.N(N), .W(W)) u_key (
      .clk, .we(key_we), .waddr(key_waddr), .wdata(key_wdata[K+j]),
      .raddr(cq_cur), .rdata(key));
    for (genvar b = 0; b < 2; b++) begin : g_lane
      logic [W-1:0] r0, r1, r2, r3;
      logic [W-1:0] dl0 [MM_LAT], dl1 [MM_LAT];
      logic [W-1:0] m20, m21, m30, m31;
      always_ff @(posedge clk) begin
        r0 <= d[0][j][b];
        r1 <= d[1][j][b];
        r2 <= d[2][j][b];
        r3 <= d[3][j][b];
        dl0[0] <= r0;
        dl1[0] <= r1;
        for (int i = 1; i < MM_LAT; i++) begin
          dl0[i] <= dl0[i-1];
          dl1[i] <= dl1[i-1];
        end
      end
      modmul #(.W(W)) u_m20 (.clk, .a(r2), .b(key[0][b]), .q(q[j]), .mu(muq[j]), .y(m20));
      modmul #(.W(W)) u_m21 (.clk, .a(r2), .b(key[1][b]), .q(q[j]), .mu(muq[j]), .y(m21));
      modmul #(.W(W)) u_m30 (.clk, .a(r3), .b(key[2][b]), .q(q[j]), .mu(muq[j]), .y(m30));
      modmul #(.W(W)) u_m31 (.clk, .a(r3), .b(key[3][b]), .q(q[j]), .mu(muq[j]), .y(m31));
      always_ff @(posedge clk) begin
        ct[0][b] <= f_madd(f_madd(dl0[MM_LAT-1], m20, q[j]), m30, q[j]);
        ct[1][b] <= f_madd(f_madd(dl1[MM_LAT-1], m21, q[j]), m31, q[j]);
      end
    end
    for (genvar l = 0; l < 2; l++) begin : g_intt
      intt #(.N(N), .W(W)) u_intt (
        .clk, .rst_n, .q(q[j]), .mu(muq[j]),
        .tw_we(tw_we && tw_inv), .tw_addr, .tw_data(tw_q[j]),
        .in_valid(qfv[MM_LAT]), .in_sof(qfs[MM_LAT]), .in0(ct[l][0]), .in1(ct[l][1]),
        .out_valid(), .out_sof(), .out0(cq[l][j][0]), .out1(cq[l][j][1]));
      for (genvar b = 0; b < 2; b++) begin : g_dly
        delay_line #(.WIDTH(W), .D(DQ)) u_dq (.clk, .rst_n, .din(cq[l][j][b]),
                                              .dout(cqd[l][j][b]));
      end
    end
  end

  // ---------------- p-path -----------------------------------------------
  logic [W-1:0] dup  [2][K][2];     // ModUp(D2), ModUp(D3)
  logic         upv  [2];
  logic         ups  [2];
  for (genvar t = 0; t < 2; t++) begin : g_modup
    modup #(.N(N), .W(W), .L(L), .K(K)) u_modup (
      .clk, .rst_n, .q, .muq, .p, .mup, .bc_c1(up_c1), .bc_c2(up_c2),
      .tw_we, .tw_inv, .tw_addr, .tw_q, .tw_p,
      .in_valid, .in_sof, .din(d[2+t]),
      .out_valid(upv[t]), .out_sof(ups[t]), .dout(dup[t]));
  end

  logic [S-2:0] cp_cnt, cp_cur;
  logic         pv1, ps1;
  always_comb cp_cur = ups[0] ? '0 : cp_cnt + 1'b1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cp_cnt <= '1;
      pv1    <= 1'b0;
      ps1    <= 1'b0;
    end else begin
      cp_cnt <= cp_cur;
      pv1    <= upv[0];
      ps1    <= ups[0];
    end
  end
  logic [MM_LAT:0] pfv, pfs;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pfv <= '0;
      pfs <= '0;
    end else begin
      pfv <= {pfv[MM_LAT-1:0], pv1};
      pfs <= {pfs[MM_LAT-1:0], ps1};
    end
  end

  logic [W-1:0] cpi [2][2][K];     // [l][lane][i] coefficient domain, basis P
  logic         piv [K];
  logic         pis [K];
  for (genvar i = 0; i < K; i++) begin : g_p
    logic [W-1:0] key [4][2];
    logic [W-1:0] ct  [2][2];
    evk_mem #(.N(N), .W(W)) u_key (
      .clk, .we(key_we), .waddr(key_waddr), .wdata(key_wdata[i]),
      .raddr(cp_cur), .rdata(key));
    for (genvar b = 0; b < 2; b++) begin : g_lane
      logic [W-1:0] r2, r3;
      logic [W-1:0] m20, m21, m30, m31;
      always_ff @(posedge clk) begin
        r2 <= dup[0][i][b];
        r3 <= dup[1][i][b];
      end
      modmul #(.W(W)) u_m20 (.clk, .a(r2), .b(key[0][b]), .q(p[i]), .mu(mup[i]), .y(m20));
      modmul #(.W(W)) u_m21 (.clk, .a(r2), .b(key[1][b]), .q(p[i]), .mu(mup[i]), .y(m21));
      modmul #(.W(W)) u_m30 (.clk, .a(r3), .b(key[2][b]), .q(p[i]), .mu(mup[i]), .y(m30));
      modmul #(.W(W)) u_m31 (.clk, .a(r3), .b(key[3][b]), .q(p[i]), .mu(mup[i]), .y(m31));
      always_ff @(posedge clk) begin
        ct[0][b] <= f_madd(m20, m30, p[i]);
        ct[1][b] <= f_madd(m21, m31, p[i]);
      end
    end
    for (genvar l = 0; l < 2; l++) begin : g_intt
      logic v, s;
      intt #(.N(N), .W(W)) u_intt (
        .clk, .rst_n, .q(p[i]), .mu(mup[i]),
        .tw_we(tw_we && tw_inv), .tw_addr, .tw_data(tw_p[i]),
        .in_valid(pfv[MM_LAT]), .in_sof(pfs[MM_LAT]), .in0(ct[l][0]), .in1(ct[l][1]),
        .out_valid(v), .out_sof(s), .out0(cpi[l][0][i]), .out1(cpi[l][1][i]));
      if (l == 0) begin : g_flag
        assign piv[i] = v;
        assign pis[i] = s;
      end
    end
  end

  // scBConv back to basis Q, with P^-1 folded into its constants
  logic [W-1:0] cpq [2][2][L];     // [l][lane][j]
  for (genvar l = 0; l < 2; l++) begin : g_scb
    for (genvar b = 0; b < 2; b++) begin : g_lane
      bconv #(.W(W), .LI(K), .LO(L)) u_scb (
        .clk, .x(cpi[l][b]), .qi(p), .mui(mup), .c1(dn_c1), .po(q), .muo(muq), .c2(dn_c2),
        .y(cpq[l][b]));
    end
  end

  logic [BCONV_LAT:0] ofv, ofs;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ofv <= '0;
      ofs <= '0;
    end else begin
      ofv <= {ofv[BCONV_LAT-1:0], piv[0]};
      ofs <= {ofs[BCONV_LAT-1:0], pis[0]};
    end
  end
  assign out_valid = ofv[BCONV_LAT];
  assign out_sof   = ofs[BCONV_LAT];

  for (genvar l = 0; l < 2; l++) begin : g_out
    for (genvar j = 0; j < L; j++) begin : g_ch
      for (genvar b = 0; b < 2; b++) begin : g_lane
        always_ff @(posedge clk) c[l][j][b] <= f_msub(cqd[l][j][b], cpq[l][b][j], q[j]);
      end
    end
  end
endmodule
