// tb_pm3: self-checking test of the three-ciphertext polynomial multiplier.
//
// Drives random NTT-domain coefficients of three ciphertexts (three 30-bit
// channels, two lanes) every cycle, with occasional all-(q-1) inputs, and
// compares d0..d3 with the schoolbook expansion of
// (a0 + a1 s)(b0 + b1 s)(c0 + c1 s) computed with the % operator, exactly
// nine cycles later (the Karatsuba pipeline's latency), flags included.
module tb_pm3;
  import he_ref_pkg::*;
  localparam int W   = 30;
  localparam int L   = 3;
  localparam int NV  = 300;
  localparam int LAT = 9;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [W-1:0] q [L];
  logic [W:0]   mu [L];
  logic         in_valid, in_sof, out_valid, out_sof;
  logic [W-1:0] ct1 [2][L][2], ct2 [2][L][2], ct3 [2][L][2];
  logic [W-1:0] d [4][L][2];

  pm3 #(.W(W), .L(L)) dut (.*);

  int checks = 0, failures = 0;
  rns_cfg cfg;
  u64_t exp_q [$];
  bit   v_q [$], s_q [$];

  initial begin : watchdog
    repeat (NV + 100) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = new(1, W, L, 0);
    for (int j = 0; j < L; j++) begin
      q[j] = W'(cfg.q[j]); mu[j] = (W+1)'(cfg.mu(cfg.q[j]));
    end
    in_valid = 0; in_sof = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NV + LAT; i++) begin
      @(negedge clk);
      if (i >= LAT) begin
        checks++;
        if (out_valid != v_q[0] || out_sof != s_q[0]) begin
          failures++;
          $display("FAIL: flags at %0d", i);
        end
        void'(v_q.pop_front()); void'(s_q.pop_front());
        for (int j = 0; j < L; j++) for (int b = 0; b < 2; b++) for (int t = 0; t < 4; t++) begin
          checks++;
          if (d[t][j][b] != W'(exp_q[0])) begin
            failures++;
            if (failures < 10) $display("FAIL: vector %0d d%0d ch %0d got %0h exp %0h", i - LAT, t, j, d[t][j][b], exp_q[0]);
          end
          void'(exp_q.pop_front());
        end
      end
      in_valid = (i % 13) != 4; in_sof = in_valid && (i % 8) == 0;
      v_q.push_back(in_valid); s_q.push_back(in_sof);
      for (int j = 0; j < L; j++) for (int b = 0; b < 2; b++) begin
        automatic u64_t m = cfg.q[j];
        automatic u64_t v [6];
        for (int k = 0; k < 6; k++) v[k] = (i % 10 == 3) ? m - 1 : u64_t'($urandom) % m;
        ct1[0][j][b] = W'(v[0]); ct1[1][j][b] = W'(v[1]);
        ct2[0][j][b] = W'(v[2]); ct2[1][j][b] = W'(v[3]);
        ct3[0][j][b] = W'(v[4]); ct3[1][j][b] = W'(v[5]);
        exp_q.push_back(mulmod(mulmod(v[0], v[2], m), v[4], m));
        exp_q.push_back(addmod(addmod(mulmod(mulmod(v[1], v[2], m), v[4], m),
                                      mulmod(mulmod(v[0], v[3], m), v[4], m), m),
                               mulmod(mulmod(v[0], v[2], m), v[5], m), m));
        exp_q.push_back(addmod(addmod(mulmod(mulmod(v[1], v[3], m), v[4], m),
                                      mulmod(mulmod(v[1], v[2], m), v[5], m), m),
                               mulmod(mulmod(v[0], v[3], m), v[5], m), m));
        exp_q.push_back(mulmod(mulmod(v[1], v[3], m), v[5], m));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
