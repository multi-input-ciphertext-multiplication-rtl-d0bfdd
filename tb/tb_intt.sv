// tb_intt: self-checking test of the 2-parallel inverse NTT.
//
// Loads the twiddle memories with psiinv_rev for a 30-bit NTT-friendly prime,
// streams the textbook transforms of four random polynomials (three frames
// back to back, then one after an idle gap) in bit-reversed pair order
// (A[2c], A[2c+1]) and checks that the original coefficients come back as
// (a[c], a[c+N/2]), including the 1/N factor, after N/2 - 1 + 5 log2 N cycles.
module tb_intt;
  import he_ref_pkg::*;
  import he_pkg::*;
  localparam int N = 32;
  localparam int W = 30;
  localparam int S = $clog2(N);
  localparam int NF = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [W-1:0] q;
  logic [W:0]   mu;
  logic         tw_we;
  logic [S-1:0] tw_addr;
  logic [W-1:0] tw_data;
  logic         in_valid, in_sof, out_valid, out_sof;
  logic [W-1:0] in0, in1, out0, out1;

  intt #(.N(N), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  poly_t a [NF];
  poly_t A [NF];
  u64_t qv, psi;
  longint cyc = 0, t_in0 = -1, t_out0 = -1;
  always @(posedge clk) cyc++;

  task automatic fail(input string msg);
    failures++;
    $display("FAIL: %s", msg);
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  int of = 0, oc = 0;
  always @(negedge clk) if (rst_n && out_valid) begin
    if (out_sof) begin
      oc = 0;
      if (t_out0 < 0) t_out0 = cyc;
    end
    if (of < NF) begin
      checks++;
      if (out0 != W'(a[of][oc]) || out1 != W'(a[of][oc+N/2]))
        fail($sformatf("frame %0d pair %0d: got %0h %0h exp %0h %0h", of, oc, out0, out1,
                       a[of][oc], a[of][oc+N/2]));
    end
    oc++;
    if (oc == N / 2) of++;
  end

  initial begin
    qv  = find_prime(W, N, 0);
    psi = find_psi(qv, N);
    q   = W'(qv);
    mu  = (W+1)'(barrett_mu(qv, W));
    tw_we = 0; tw_addr = 0; tw_data = 0;
    in_valid = 0; in_sof = 0; in0 = 0; in1 = 0;
    // reference self-check: NTT turns pointwise products into x^N+1 products
    begin
      automatic poly_t x = rand_poly(N, qv), y = rand_poly(N, qv), p, X, Y;
      X = ntt_ref(x, qv, psi);
      Y = ntt_ref(y, qv, psi);
      p = new[N];
      for (int i = 0; i < N; i++) p[i] = mulmod(X[i], Y[i], qv);
      p = intt_ref(p, qv, psi);
      checks++;
      if (p != negacyclic_mul(x, y, qv)) fail("reference transform");
    end
    for (int f = 0; f < NF; f++) begin
      a[f] = rand_poly(N, qv);
      A[f] = ntt_ref(a[f], qv, psi);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load twiddles psi_rev[1..N-1]
    begin
      automatic poly_t tw = tw_table(qv, invmod(psi, qv), N);
      for (int k = 1; k < N; k++) begin
        @(negedge clk);
        tw_we = 1; tw_addr = S'(k); tw_data = W'(tw[k]);
      end
      @(negedge clk) tw_we = 0;
    end
    for (int f = 0; f < NF; f++) begin
      if (f == 3) begin
        @(negedge clk) in_valid = 0; in_sof = 0;
        repeat (N) @(negedge clk);
      end
      for (int c = 0; c < N / 2; c++) begin
        @(negedge clk);
        in_valid = 1; in_sof = (c == 0);
        if (f == 0 && c == 0) t_in0 = cyc;
        in0 = W'(A[f][2*c]); in1 = W'(A[f][2*c+1]);
      end
    end
    @(negedge clk) in_valid = 0; in_sof = 0;
    wait (of == NF);
    repeat (5) @(posedge clk);
    checks++;
    if (t_out0 - t_in0 != ntt_lat(N))
      fail($sformatf("latency %0d, expected %0d", t_out0 - t_in0, ntt_lat(N)));
    $display("latency %0d cycles", t_out0 - t_in0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
