// tb_modup: self-checking test of the ModUp unit (INTT, basis conversion,
// NTT) at N = 16 with four 30-bit q channels and four p channels.
//
// Loads inverse twiddles for the q channels and forward twiddles for the
// p channels over the shared bus, streams three random NTT-domain
// polynomials (two back to back, one after an idle gap) and compares every
// output pair with inverse transform, textbook basis conversion and forward
// transform done in software. Checks the latency 2*ntt_lat(N) + 8.
module tb_modup;
  import he_ref_pkg::*;
  import he_pkg::*;
  localparam int N = 16, W = 30, L = 4, K = 4, S = $clog2(N), NF = 3;
  localparam int LAT = 2 * ntt_lat(N) + BCONV_LAT + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [W-1:0] q [L], p [K], bc_c1 [L], bc_c2 [K][L], tw_q [L], tw_p [K];
  logic [W:0]   muq [L], mup [K];
  logic         tw_we, tw_inv, in_valid, in_sof, out_valid, out_sof;
  logic [S-1:0] tw_addr;
  logic [W-1:0] din [L][2], dout [K][2];

  modup #(.N(N), .W(W), .L(L), .K(K)) dut (.*);

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
      for (int i = 0; i < K; i++) begin
        checks++;
        if (dout[i][0] != W'(y[of][i][2*oc]) || dout[i][1] != W'(y[of][i][2*oc+1])) begin
          failures++;
          if (failures < 10) $display("FAIL: frame %0d ch %0d pair %0d", of, i, oc);
        end
      end
    oc++;
    if (oc == N / 2) of++;
  end

  initial begin
    automatic u64_t c1 [] = new[L];
    automatic u64_t c2 [][] = new[K];
    cfg = new(N, W, L, K);
    for (int j = 0; j < L; j++) begin
      q[j] = W'(cfg.q[j]); muq[j] = (W+1)'(cfg.mu(cfg.q[j]));
      c1[j] = cfg.up_c1(j); bc_c1[j] = W'(c1[j]);
    end
    for (int i = 0; i < K; i++) begin
      p[i] = W'(cfg.p[i]); mup[i] = (W+1)'(cfg.mu(cfg.p[i]));
      c2[i] = new[L];
      for (int j = 0; j < L; j++) begin c2[i][j] = cfg.up_c2(i, j); bc_c2[i][j] = W'(c2[i][j]); end
    end
    for (int f = 0; f < NF; f++) begin
      automatic poly_t xs [] = new[L], ys [];
      x[f] = new[L];
      for (int j = 0; j < L; j++) begin
        x[f][j] = rand_poly(N, cfg.q[j]);
        xs[j] = intt_ref(x[f][j], cfg.q[j], cfg.psiq[j]);
      end
      bconv_ref(xs, cfg.q, cfg.p, c1, c2, ys);
      y[f] = new[K];
      for (int i = 0; i < K; i++) y[f][i] = ntt_ref(ys[i], cfg.p[i], cfg.psip[i]);
    end
    tw_we = 0; tw_inv = 0; tw_addr = 0; in_valid = 0; in_sof = 0;
    for (int j = 0; j < L; j++) begin tw_q[j] = 0; din[j][0] = 0; din[j][1] = 0; end
    for (int i = 0; i < K; i++) tw_p[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int inv = 0; inv < 2; inv++) begin
      automatic poly_t tq [] = new[L], tp [] = new[K];
      for (int j = 0; j < L; j++) tq[j] = tw_table(cfg.q[j], invmod(cfg.psiq[j], cfg.q[j]), N);
      for (int i = 0; i < K; i++) tp[i] = tw_table(cfg.p[i], cfg.psip[i], N);
      for (int k = 1; k < N; k++) begin
        tw_we = 1; tw_inv = inv[0]; tw_addr = S'(k);
        for (int j = 0; j < L; j++) tw_q[j] = inv ? W'(tq[j][k]) : '1;
        for (int i = 0; i < K; i++) tw_p[i] = inv ? '1 : W'(tp[i][k]);
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
