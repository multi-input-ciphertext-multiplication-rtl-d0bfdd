// tb_rs_star: self-checking test of RS* (rescaling followed by the forward
// transform of every kept channel) at N = 16 with four 30-bit channels in.
//
// Streams three random coefficient-domain polynomials in the transforms'
// standard order (pair c holds coefficients c and c + N/2), two back to
// back and one after a gap, and compares the NTT-domain output with a
// software rescaling and textbook NTT. Checks the latency 4 + ntt_lat(N).
module tb_rs_star;
  import he_ref_pkg::*;
  import he_pkg::*;
  localparam int N = 16, W = 30, LIN = 4, S = $clog2(N), NF = 3;
  localparam int LAT = 4 + ntt_lat(N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [W-1:0] q [LIN-1], qinv [LIN-1], tw_q [LIN-1];
  logic [W:0]   mu [LIN-1];
  logic         tw_we, tw_inv, in_valid, in_sof, out_valid, out_sof;
  logic [S-1:0] tw_addr;
  logic [W-1:0] din [LIN][2], dout [LIN-1][2];

  rs_star #(.N(N), .W(W), .LIN(LIN)) dut (.*);

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
      for (int j = 0; j < LIN - 1; j++) begin
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
    cfg = new(N, W, LIN, 0);
    for (int j = 0; j < LIN - 1; j++) begin
      q[j] = W'(cfg.q[j]); mu[j] = (W+1)'(cfg.mu(cfg.q[j]));
      qinv[j] = W'(cfg.qinv(LIN - 1, j));
    end
    for (int f = 0; f < NF; f++) begin
      automatic poly_t r [];
      x[f] = new[LIN];
      for (int j = 0; j < LIN; j++) x[f][j] = rand_poly(N, cfg.q[j]);
      rs_ref(x[f], cfg.q, r);
      y[f] = new[LIN-1];
      for (int j = 0; j < LIN - 1; j++) y[f][j] = ntt_ref(r[j], cfg.q[j], cfg.psiq[j]);
    end
    tw_we = 0; tw_inv = 0; tw_addr = 0; in_valid = 0; in_sof = 0;
    for (int j = 0; j < LIN - 1; j++) tw_q[j] = 0;
    for (int j = 0; j < LIN; j++) begin din[j][0] = 0; din[j][1] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int inv = 0; inv < 2; inv++) begin
      automatic poly_t tq [] = new[LIN-1];
      for (int j = 0; j < LIN - 1; j++) tq[j] = tw_table(cfg.q[j], cfg.psiq[j], N);
      for (int k = 1; k < N; k++) begin
        tw_we = 1; tw_inv = inv[0]; tw_addr = S'(k);
        for (int j = 0; j < LIN - 1; j++) tw_q[j] = inv ? '1 : W'(tq[j][k]);
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
        for (int j = 0; j < LIN; j++) begin
          din[j][0] = W'(x[f][j][c]); din[j][1] = W'(x[f][j][c + N/2]);
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
