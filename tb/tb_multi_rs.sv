// tb_multi_rs: self-checking test of the combined rescaling (multi-RS) by
// the top two moduli, at N = 16 with five 30-bit channels.
//
// Streams three random NTT-domain polynomials (two back to back, one after
// a gap) and compares the NTT-domain output with what two separate plain
// rescalings give: inverse transform of every channel, two software
// rescaling steps, forward transform. Checks the latency
// 2*ntt_lat(N) + 4(MU-1) + 5.
module tb_multi_rs;
  import he_ref_pkg::*;
  import he_pkg::*;
  localparam int N = 16, W = 30, L = 5, MU = 2, S = $clog2(N), NF = 3;
  localparam int LAT = 2 * ntt_lat(N) + 4 * (MU - 1) + 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [W-1:0] q [L], tw_q [L], rsc [MU][MU], g [L-MU][MU];
  logic [W:0]   mu [L];
  logic         tw_we, tw_inv, in_valid, in_sof, out_valid, out_sof;
  logic [S-1:0] tw_addr;
  logic [W-1:0] din [L][2], dout [L-MU][2];

  multi_rs #(.N(N), .W(W), .L(L), .MU(MU)) dut (.*);

  int checks = 0, failures = 0;
  rns_cfg cfg;
  poly_t  x [NF][], y [NF][];
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
      for (int j = 0; j < L - MU; j++) begin
        checks++;
        if (dout[j][0] != W'(y[of][j][2*oc]) || dout[j][1] != W'(y[of][j][2*oc+1])) begin
          failures++;
          if (failures < 10) $display("FAIL: frame %0d ch %0d pair %0d", of, j, oc);
        end
      end
    oc++;
    if (oc == N / 2) of++;
  end

  initial begin
    cfg = new(N, W, L, 0);
    for (int j = 0; j < L; j++) begin
      q[j] = W'(cfg.q[j]); mu[j] = (W+1)'(cfg.mu(cfg.q[j]));
    end
    // rsc[u][k] = q_{L-u}^-1 mod q_{L-MU+k};  g[e][k] = (q_{L-MU}..q_{L-MU+k})^-1 mod q_e
    for (int u = 0; u < MU; u++)
      for (int k = 0; k < MU; k++)
        rsc[u][k] = (u == 0 || L - MU + k >= L - u) ? '0 : W'(cfg.qinv(L - u, L - MU + k));
    for (int e = 0; e < L - MU; e++) begin
      automatic u64_t acc = 1;
      for (int k = 0; k < MU; k++) begin
        acc = mulmod(acc, cfg.qinv(L - MU + k, e), cfg.q[e]);
        g[e][k] = W'(acc);
      end
    end
    for (int f = 0; f < NF; f++) begin
      x[f] = new[L];
      for (int j = 0; j < L; j++) x[f][j] = rand_poly(N, cfg.q[j]);
      rs2_ntt_ref(cfg, x[f], y[f]);
    end
    tw_we = 0; tw_inv = 0; tw_addr = 0; in_valid = 0; in_sof = 0;
    for (int j = 0; j < L; j++) begin tw_q[j] = 0; din[j][0] = 0; din[j][1] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int inv = 0; inv < 2; inv++) begin
      automatic poly_t tq [] = new[L];
      for (int j = 0; j < L; j++)
        tq[j] = tw_table(cfg.q[j], inv ? invmod(cfg.psiq[j], cfg.q[j]) : cfg.psiq[j], N);
      for (int k = 1; k < N; k++) begin
        tw_we = 1; tw_inv = inv[0]; tw_addr = S'(k);
        for (int j = 0; j < L; j++) tw_q[j] = W'(tq[j][k]);
        @(negedge clk);
      end
    end
    tw_we = 0;
    repeat (3) @(negedge clk);
    for (int f = 0; f < NF; f++) begin
      if (f == 2) begin
        in_valid = 0; in_sof = 0;
        repeat (N) @(negedge clk);
      end
      for (int c = 0; c < N / 2; c++) begin
        if (f == 0 && c == 0) t_in0 = cyc;
        in_valid = 1; in_sof = (c == 0);
        for (int j = 0; j < L; j++) begin din[j][0] = W'(x[f][j][2*c]); din[j][1] = W'(x[f][j][2*c+1]); end
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
