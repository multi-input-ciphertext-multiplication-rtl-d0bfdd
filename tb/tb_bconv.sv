// tb_bconv: self-checking test of the fast basis conversion unit.
//
// Converts random residue vectors from four 30-bit source moduli to three
// destination moduli (different counts, so a swapped index shows), with the
// real constants c1_j = (Q/q_j)^-1 mod q_j and c2_ij = (Q/q_j) mod p_i. A
// new vector enters every cycle; each output is compared with the textbook
// sum, reduced with the % operator, exactly BCONV_LAT = 7 cycles later.
module tb_bconv;
  import he_ref_pkg::*;
  import he_pkg::*;
  localparam int W  = 30;
  localparam int LI = 4;
  localparam int LO = 3;
  localparam int NV = 500;

  logic clk = 0;
  always #5 clk = ~clk;
  logic [W-1:0] x [LI], qi [LI], c1 [LI], po [LO], c2 [LO][LI], y [LO];
  logic [W:0]   mui [LI], muo [LO];

  bconv #(.W(W), .LI(LI), .LO(LO)) dut (.*);

  int checks = 0, failures = 0;
  rns_cfg cfg;
  u64_t  exp_q [$];

  initial begin : watchdog
    repeat (NV + 100) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    u64_t c1v [] = new[LI];
    u64_t c2v [][] = new[LO];
    poly_t xv [] = new[LI], yv [];
    cfg = new(1, W, LI, LO);
    for (int j = 0; j < LI; j++) begin
      qi[j] = W'(cfg.q[j]); mui[j] = (W+1)'(cfg.mu(cfg.q[j]));
      c1v[j] = cfg.up_c1(j); c1[j] = W'(c1v[j]);
    end
    for (int i = 0; i < LO; i++) begin
      po[i] = W'(cfg.p[i]); muo[i] = (W+1)'(cfg.mu(cfg.p[i]));
      c2v[i] = new[LI];
      for (int j = 0; j < LI; j++) begin
        c2v[i][j] = cfg.up_c2(i, j); c2[i][j] = W'(c2v[i][j]);
      end
    end
    for (int i = 0; i < NV + BCONV_LAT; i++) begin
      @(negedge clk);
      if (i >= BCONV_LAT) begin
        for (int o = 0; o < LO; o++) begin
          checks++;
          if (y[o] != W'(exp_q[0])) begin
            failures++;
            if (failures < 10) $display("FAIL: vector %0d out %0d got %0h exp %0h", i - BCONV_LAT, o, y[o], exp_q[0]);
          end
          void'(exp_q.pop_front());
        end
      end
      for (int j = 0; j < LI; j++) begin
        xv[j] = new[1];
        xv[j][0] = (i % 9 == 0) ? cfg.q[j] - 1 : u64_t'($urandom) % cfg.q[j];
        x[j] = W'(xv[j][0]);
      end
      bconv_ref(xv, cfg.q, cfg.p, c1v, c2v, yv);
      for (int o = 0; o < LO; o++) exp_q.push_back(yv[o][0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
