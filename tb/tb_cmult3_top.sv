// tb_cmult3_top: end-to-end test of the three-input ciphertext multiplier.
//
// Builds a small RNS configuration (N = 16, 30-bit NTT-friendly primes,
// L = K = 4 channels), loads every twiddle memory and the relinearization
// keys through the shared load buses, then streams three frames of three
// random NTT-domain ciphertexts: two back to back and one after an idle gap.
// Every output pair is compared with a reference computed here from the
// textbook operations (Karatsuba-free pointwise tensor product, ModUp with
// fast basis conversion, key products, ModDown with P^-1 folded into the
// keys, two plain rescalings, forward transform), so the merged ModDown, the
// coefficient-domain rescaling, RS* and the combined two-level rescaling of
// the group outputs are all checked against the operations they replace.
// Latencies are checked against 2N + 34 + 20 log2 N (ciphertext output) and
// 2(N/2 - 1 + 5 log2 N) + 18 (group output). The test counts how often each
// mechanism fired (ModUp, relinearization, rescaling, RS*, multi-RS frames,
// back-to-back frames, a frame after an idle gap) and fails one that never did.
module tb_cmult3_top;
  import he_ref_pkg::*;
  import he_pkg::*;
  localparam int N  = 16;
  localparam int W  = 30;
  localparam int L  = 4;
  localparam int K  = 4;
  localparam int S  = $clog2(N);
  localparam int NF = 3;
  localparam int LAT_CT  = 2 * N + 34 + 20 * S;
  localparam int LAT_GRP = 2 * ntt_lat(N) + 18;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [W-1:0]   q [L];
  logic [W:0]     muq [L];
  logic [W-1:0]   p [K];
  logic [W:0]     mup [K];
  logic [W-1:0]   up_c1 [L];
  logic [W-1:0]   up_c2 [K][L];
  logic [W-1:0]   dn_c1 [K];
  logic [W-1:0]   dn_c2 [L][K];
  logic [W-1:0]   rs_qinv [L-1];
  logic [W-1:0]   rss_qinv [L-2];
  logic [W-1:0]   mrs_rsc [2][2];
  logic [W-1:0]   mrs_g [L-2][2];
  logic           tw_we, tw_inv;
  logic [S-1:0]   tw_addr;
  logic [W-1:0]   tw_q [L];
  logic [W-1:0]   tw_p [K];
  logic           key_we;
  logic [S-2:0]   key_waddr;
  logic [W-1:0]   key_wdata [K+L][4][2];
  logic           in_valid, in_sof;
  logic [W-1:0]   ct1 [2][L][2];
  logic [W-1:0]   ct2 [2][L][2];
  logic [W-1:0]   ct3 [2][L][2];
  logic           out_valid, out_sof, grp_valid, grp_sof;
  logic [W-1:0]   ct_out [2][L-2][2];
  logic [W-1:0]   grp_out [4][L-2][2];

  cmult3_top #(.N(N), .W(W), .L(L), .K(K)) dut (.*);

  int checks = 0, failures = 0;
  rns_cfg cfg;
  poly_t  ct [NF][3][2][];     // inputs [frame][operand][component][channel]
  poly_t  key [][];            // [component][0..3]
  poly_t  exp_ct [NF][][];     // [frame][component][channel]
  poly_t  exp_grp [NF][4][];   // [frame][term][channel]
  longint cyc = 0, t_in0 = -1, t_out0 = -1, t_grp0 = -1;
  int     n_modup = 0, n_relin = 0, n_rs = 0, n_rss = 0, n_mrs = 0;
  int     n_b2b = 0, n_gap = 0;
  always @(posedge clk) cyc++;

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("FAIL: %s", msg);
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters (frame starts seen inside the design)
  always @(negedge clk) if (rst_n) begin
    if (dut.u_relin.upv[0] && dut.u_relin.ups[0]) n_modup++;
    if (dut.rv && dut.rsf) n_relin++;
    if (dut.r1v[0] && dut.r1s[0]) n_rs++;
    if (out_valid && out_sof) n_rss++;
    if (grp_valid && grp_sof) n_mrs++;
  end

  // ciphertext output checker
  int of = 0, oc = 0;
  always @(negedge clk) if (rst_n && out_valid) begin
    if (out_sof) begin
      oc = 0;
      if (t_out0 < 0) t_out0 = cyc;
    end
    if (of < NF) begin
      for (int l = 0; l < 2; l++)
        for (int j = 0; j < L - 2; j++) begin
          checks++;
          if (ct_out[l][j][0] != W'(exp_ct[of][l][j][2*oc]) ||
              ct_out[l][j][1] != W'(exp_ct[of][l][j][2*oc+1]))
            fail($sformatf("ct_out frame %0d comp %0d ch %0d pair %0d: got %0h %0h exp %0h %0h",
                           of, l, j, oc, ct_out[l][j][0], ct_out[l][j][1],
                           exp_ct[of][l][j][2*oc], exp_ct[of][l][j][2*oc+1]));
        end
    end
    oc++;
    if (oc == N / 2) of++;
  end

  // group (multi-RS) output checker
  int gf = 0, gc = 0;
  always @(negedge clk) if (rst_n && grp_valid) begin
    if (grp_sof) begin
      gc = 0;
      if (t_grp0 < 0) t_grp0 = cyc;
    end
    if (gf < NF) begin
      for (int t = 0; t < 4; t++)
        for (int j = 0; j < L - 2; j++) begin
          checks++;
          if (grp_out[t][j][0] != W'(exp_grp[gf][t][j][2*gc]) ||
              grp_out[t][j][1] != W'(exp_grp[gf][t][j][2*gc+1]))
            fail($sformatf("grp_out frame %0d term %0d ch %0d pair %0d: got %0h %0h exp %0h %0h",
                           gf, t, j, gc, grp_out[t][j][0], grp_out[t][j][1],
                           exp_grp[gf][t][j][2*gc], exp_grp[gf][t][j][2*gc+1]));
        end
    end
    gc++;
    if (gc == N / 2) gf++;
  end

  function automatic void make_reference(input int f);
    poly_t d [][] = new[4];
    poly_t cs [][];
    for (int t = 0; t < 4; t++) begin
      d[t] = new[L];
      for (int j = 0; j < L; j++) d[t][j] = new[N];
    end
    // tensor product of three degree-1 ciphertexts
    for (int j = 0; j < L; j++)
      for (int x = 0; x < N; x++) begin
        u64_t m = cfg.q[j];
        u64_t a0 = ct[f][0][0][j][x], a1 = ct[f][0][1][j][x];
        u64_t b0 = ct[f][1][0][j][x], b1 = ct[f][1][1][j][x];
        u64_t c0 = ct[f][2][0][j][x], c1 = ct[f][2][1][j][x];
        d[0][j][x] = mulmod(mulmod(a0, b0, m), c0, m);
        d[1][j][x] = addmod(addmod(mulmod(mulmod(a1, b0, m), c0, m), mulmod(mulmod(a0, b1, m), c0, m), m),
                            mulmod(mulmod(a0, b0, m), c1, m), m);
        d[2][j][x] = addmod(addmod(mulmod(mulmod(a1, b1, m), c0, m), mulmod(mulmod(a1, b0, m), c1, m), m),
                            mulmod(mulmod(a0, b1, m), c1, m), m);
        d[3][j][x] = mulmod(mulmod(a1, b1, m), c1, m);
      end
    for (int t = 0; t < 4; t++) rs2_ntt_ref(cfg, d[t], exp_grp[f][t]);
    relin_ref(cfg, d, key, cs);
    exp_ct[f] = new[2];
    for (int l = 0; l < 2; l++) begin
      poly_t r1 [], r2 [];
      rs_ref(cs[l], cfg.q, r1);
      rs_ref(r1, cfg.q, r2);
      exp_ct[f][l] = new[L-2];
      for (int j = 0; j < L - 2; j++) exp_ct[f][l][j] = ntt_ref(r2[j], cfg.q[j], cfg.psiq[j]);
    end
  endfunction

  initial begin
    cfg = new(N, W, L, K);
    for (int j = 0; j < L; j++) begin
      q[j] = W'(cfg.q[j]);
      muq[j] = (W+1)'(cfg.mu(cfg.q[j]));
      up_c1[j] = W'(cfg.up_c1(j));
      for (int i = 0; i < K; i++) dn_c2[j][i] = W'(cfg.dn_c2(j, i));
    end
    for (int i = 0; i < K; i++) begin
      p[i] = W'(cfg.p[i]);
      mup[i] = (W+1)'(cfg.mu(cfg.p[i]));
      dn_c1[i] = W'(cfg.dn_c1(i));
      for (int j = 0; j < L; j++) up_c2[i][j] = W'(cfg.up_c2(i, j));
    end
    for (int j = 0; j < L - 1; j++) rs_qinv[j] = W'(cfg.qinv(L - 1, j));
    for (int j = 0; j < L - 2; j++) begin
      rss_qinv[j] = W'(cfg.qinv(L - 2, j));
      mrs_g[j][0] = W'(cfg.qinv(L - 2, j));
      mrs_g[j][1] = W'(mulmod(cfg.qinv(L - 2, j), cfg.qinv(L - 1, j), cfg.q[j]));
    end
    mrs_rsc[0][0] = 0;
    mrs_rsc[0][1] = 0;
    mrs_rsc[1][0] = W'(cfg.qinv(L - 1, L - 2));
    mrs_rsc[1][1] = 0;
    tw_we = 0; tw_inv = 0; tw_addr = 0; key_we = 0; key_waddr = 0;
    in_valid = 0; in_sof = 0;
    for (int j = 0; j < L; j++) tw_q[j] = 0;
    for (int i = 0; i < K; i++) tw_p[i] = 0;
    for (int c = 0; c < K + L; c++) for (int e = 0; e < 4; e++) for (int b = 0; b < 2; b++)
      key_wdata[c][e][b] = 0;
    for (int u = 0; u < 3; u++) for (int l = 0; l < 2; l++) for (int j = 0; j < L; j++)
      for (int b = 0; b < 2; b++) begin
        ct1[l][j][b] = 0; ct2[l][j][b] = 0; ct3[l][j][b] = 0;
      end

    // keys: P part mod p_i, Q part (already scaled by P^-1) mod q_j
    key = new[K + L];
    for (int c = 0; c < K + L; c++) begin
      key[c] = new[4];
      for (int e = 0; e < 4; e++) key[c][e] = rand_poly(N, c < K ? cfg.p[c] : cfg.q[c - K]);
    end
    for (int f = 0; f < NF; f++) begin
      for (int u = 0; u < 3; u++)
        for (int l = 0; l < 2; l++) begin
          ct[f][u][l] = new[L];
          for (int j = 0; j < L; j++) ct[f][u][l][j] = rand_poly(N, cfg.q[j]);
        end
      make_reference(f);
    end

    repeat (3) @(posedge clk);
    rst_n = 1;
    // twiddles: forward (tw_inv = 0) then inverse (tw_inv = 1)
    for (int inv = 0; inv < 2; inv++) begin
      automatic poly_t tq [] = new[L];
      automatic poly_t tp [] = new[K];
      for (int j = 0; j < L; j++)
        tq[j] = tw_table(cfg.q[j], inv ? invmod(cfg.psiq[j], cfg.q[j]) : cfg.psiq[j], N);
      for (int i = 0; i < K; i++)
        tp[i] = tw_table(cfg.p[i], inv ? invmod(cfg.psip[i], cfg.p[i]) : cfg.psip[i], N);
      for (int k = 1; k < N; k++) begin
        @(negedge clk);
        tw_we = 1; tw_inv = inv[0]; tw_addr = S'(k);
        for (int j = 0; j < L; j++) tw_q[j] = W'(tq[j][k]);
        for (int i = 0; i < K; i++) tw_p[i] = W'(tp[i][k]);
      end
    end
    @(negedge clk) tw_we = 0;
    // keys, two coefficients per word
    for (int c = 0; c < N / 2; c++) begin
      @(negedge clk);
      key_we = 1; key_waddr = (S-1)'(c);
      for (int m = 0; m < K + L; m++) for (int e = 0; e < 4; e++) for (int b = 0; b < 2; b++)
        key_wdata[m][e][b] = W'(key[m][e][2*c+b]);
    end
    @(negedge clk) key_we = 0;
    repeat (4) @(negedge clk);

    for (int f = 0; f < NF; f++) begin
      if (f == 2) begin
        in_valid = 0; in_sof = 0;
        repeat (N) @(negedge clk);
        n_gap++;
      end else if (f > 0) n_b2b++;
      for (int c = 0; c < N / 2; c++) begin
        if (f == 0 && c == 0) t_in0 = cyc;
        in_valid = 1; in_sof = (c == 0);
        for (int l = 0; l < 2; l++) for (int j = 0; j < L; j++) for (int b = 0; b < 2; b++) begin
          ct1[l][j][b] = W'(ct[f][0][l][j][2*c+b]);
          ct2[l][j][b] = W'(ct[f][1][l][j][2*c+b]);
          ct3[l][j][b] = W'(ct[f][2][l][j][2*c+b]);
        end
        @(negedge clk);
      end
    end
    in_valid = 0; in_sof = 0;
    wait (of == NF && gf == NF);
    repeat (5) @(posedge clk);

    checks++;
    if (t_out0 - t_in0 != LAT_CT)
      fail($sformatf("ct_out latency %0d, expected %0d", t_out0 - t_in0, LAT_CT));
    checks++;
    if (t_grp0 - t_in0 != LAT_GRP)
      fail($sformatf("grp_out latency %0d, expected %0d", t_grp0 - t_in0, LAT_GRP));
    $display("latency ct_out %0d grp_out %0d", t_out0 - t_in0, t_grp0 - t_in0);
    $display("mechanisms: modup=%0d relin=%0d rs=%0d rs_star=%0d multi_rs=%0d back_to_back=%0d gap=%0d",
             n_modup, n_relin, n_rs, n_rss, n_mrs, n_b2b, n_gap);
    checks++; if (n_modup != NF) fail("ModUp frame count");
    checks++; if (n_relin != NF) fail("relinearization frame count");
    checks++; if (n_rs != NF)    fail("rescaling frame count");
    checks++; if (n_rss != NF)   fail("RS* frame count");
    checks++; if (n_mrs != NF)   fail("multi-RS frame count");
    checks++; if (n_b2b == 0)    fail("no back-to-back frames");
    checks++; if (n_gap == 0)    fail("no frame after an idle gap");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
