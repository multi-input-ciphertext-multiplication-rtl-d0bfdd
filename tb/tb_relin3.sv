// tb_relin3: self-checking test of the merged relinearization unit at
// N = 16 with four 30-bit q channels and four p channels.
//
// Loads forward and inverse twiddles and random keys (for the q part the
// keys stand for P^-1-scaled keys, as the unit expects), streams three
// frames of random NTT-domain d0..d3 (two back to back, one after a gap)
// and compares the coefficient-domain output, in the transforms' standard
// order, with the textbook sequence ModUp, key products, INTT, basis
// conversion back to q and subtraction. Checks the latency
// 3*ntt_lat(N) + 21 = 1.5N + 18 + 15 log2 N.
module tb_relin3;
  import he_ref_pkg::*;
  import he_pkg::*;
  localparam int N = 16, W = 30, L = 4, K = 4, S = $clog2(N), NF = 3;
  localparam int LAT = 3 * N / 2 + 18 + 15 * S;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [W-1:0] q [L], p [K], up_c1 [L], up_c2 [K][L], dn_c1 [K], dn_c2 [L][K];
  logic [W-1:0] tw_q [L], tw_p [K];
  logic [W:0]   muq [L], mup [K];
  logic         tw_we, tw_inv, key_we, in_valid, in_sof, out_valid, out_sof;
  logic [S-1:0] tw_addr;
  logic [S-2:0] key_waddr;
  logic [W-1:0] key_wdata [K+L][4][2];
  logic [W-1:0] d [4][L][2], c [2][L][2];

  relin3 #(.N(N), .W(W), .L(L), .K(K)) dut (.*);

  int checks = 0, failures = 0;
  rns_cfg cfg;
  poly_t  x [NF][][], y [NF][][], key [][];
  longint cyc = 0, t_in0 = -1, t_out0 = -1;
  always @(posedge clk) cyc++;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int of = 0, oc = 0;
  always @(negedge clk) if (rst_n && out_valid) begin
    if (out_sof) begin
      oc = 0;
      if (t_out0 < 0) t_out0 = cyc;
    end
    if (of < NF)
      for (int l = 0; l < 2; l++) for (int j = 0; j < L; j++) begin
        checks++;
        if (c[l][j][0] != W'(y[of][l][j][oc]) || c[l][j][1] != W'(y[of][l][j][oc + N/2])) begin
          failures++;
          if (failures < 10) $display("FAIL: frame %0d comp %0d ch %0d pair %0d", of, l, j, oc);
        end
      end
    oc++;
    if (oc == N / 2) of++;
  end

  initial begin
    cfg = new(N, W, L, K);
    for (int j = 0; j < L; j++) begin
      q[j] = W'(cfg.q[j]); muq[j] = (W+1)'(cfg.mu(cfg.q[j]));
      up_c1[j] = W'(cfg.up_c1(j));
      for (int i = 0; i < K; i++) dn_c2[j][i] = W'(cfg.dn_c2(j, i));
    end
    for (int i = 0; i < K; i++) begin
      p[i] = W'(cfg.p[i]); mup[i] = (W+1)'(cfg.mu(cfg.p[i]));
      dn_c1[i] = W'(cfg.dn_c1(i));
      for (int j = 0; j < L; j++) up_c2[i][j] = W'(cfg.up_c2(i, j));
    end
    key = new[K + L];
    for (int m = 0; m < K + L; m++) begin
      key[m] = new[4];
      for (int e = 0; e < 4; e++) key[m][e] = rand_poly(N, m < K ? cfg.p[m] : cfg.q[m - K]);
    end
    for (int f = 0; f < NF; f++) begin
      x[f] = new[4];
      for (int t = 0; t < 4; t++) begin
        x[f][t] = new[L];
        for (int j = 0; j < L; j++) x[f][t][j] = rand_poly(N, cfg.q[j]);
      end
      relin_ref(cfg, x[f], key, y[f]);
    end
    tw_we = 0; tw_inv = 0; tw_addr = 0; key_we = 0; key_waddr = 0; in_valid = 0; in_sof = 0;
    for (int j = 0; j < L; j++) tw_q[j] = 0;
    for (int i = 0; i < K; i++) tw_p[i] = 0;
    for (int m = 0; m < K + L; m++) for (int e = 0; e < 4; e++) for (int b = 0; b < 2; b++)
      key_wdata[m][e][b] = 0;
    for (int t = 0; t < 4; t++) for (int j = 0; j < L; j++) begin d[t][j][0] = 0; d[t][j][1] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int inv = 0; inv < 2; inv++) begin
      automatic poly_t tq [] = new[L], tp [] = new[K];
      for (int j = 0; j < L; j++)
        tq[j] = tw_table(cfg.q[j], inv ? invmod(cfg.psiq[j], cfg.q[j]) : cfg.psiq[j], N);
      for (int i = 0; i < K; i++)
        tp[i] = tw_table(cfg.p[i], inv ? invmod(cfg.psip[i], cfg.p[i]) : cfg.psip[i], N);
      for (int k = 1; k < N; k++) begin
        tw_we = 1; tw_inv = inv[0]; tw_addr = S'(k);
        for (int j = 0; j < L; j++) tw_q[j] = W'(tq[j][k]);
        for (int i = 0; i < K; i++) tw_p[i] = W'(tp[i][k]);
        @(negedge clk);
      end
    end
    tw_we = 0;
    for (int a = 0; a < N / 2; a++) begin
      key_we = 1; key_waddr = (S-1)'(a);
      for (int m = 0; m < K + L; m++) for (int e = 0; e < 4; e++) for (int b = 0; b < 2; b++)
        key_wdata[m][e][b] = W'(key[m][e][2*a+b]);
      @(negedge clk);
    end
    key_we = 0;
    repeat (3) @(negedge clk);
    for (int f = 0; f < NF; f++) begin
      if (f == 2) begin
        in_valid = 0; in_sof = 0;
        repeat (N) @(negedge clk);
      end
      for (int a = 0; a < N / 2; a++) begin
        if (f == 0 && a == 0) t_in0 = cyc;
        in_valid = 1; in_sof = (a == 0);
        for (int t = 0; t < 4; t++) for (int j = 0; j < L; j++) begin
          d[t][j][0] = W'(x[f][t][j][2*a]); d[t][j][1] = W'(x[f][t][j][2*a+1]);
        end
        @(negedge clk);
      end
    end
    in_valid = 0; in_sof = 0;
    wait (of == NF);
    repeat (3) @(posedge clk);
    checks++;
    if (t_out0 - t_in0 != LAT) begin
      failures++;
      $display("FAIL: latency %0d expected %0d", t_out0 - t_in0, LAT);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
