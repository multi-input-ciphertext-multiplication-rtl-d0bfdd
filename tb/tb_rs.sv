// tb_rs: self-checking test of the coefficient-domain rescaling unit.
//
// Feeds random coefficient pairs of a four-channel polynomial (30-bit
// NTT-friendly moduli, the last channel below a larger modulus than some of
// the others) and checks each kept channel against
// (x_j - x_{L-1}) * q_{L-1}^-1 mod q_j computed with the % operator, exactly
// four cycles after the input, together with the valid and start-of-frame
// flags that travel with the data.
module tb_rs;
  import he_ref_pkg::*;
  localparam int W   = 30;
  localparam int LIN = 4;
  localparam int NV  = 400;
  localparam int LAT = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [W-1:0] q [LIN-1], qinv [LIN-1];
  logic [W:0]   mu [LIN-1];
  logic         in_valid, in_sof, out_valid, out_sof;
  logic [W-1:0] din [LIN][2], dout [LIN-1][2];

  rs #(.W(W), .LIN(LIN)) dut (.*);

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
    poly_t xv [] = new[LIN], yv [];
    cfg = new(1, W, LIN, 0);
    for (int j = 0; j < LIN - 1; j++) begin
      q[j] = W'(cfg.q[j]); mu[j] = (W+1)'(cfg.mu(cfg.q[j]));
      qinv[j] = W'(cfg.qinv(LIN - 1, j));
    end
    in_valid = 0; in_sof = 0;
    for (int j = 0; j < LIN; j++) begin din[j][0] = 0; din[j][1] = 0; end
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
        for (int b = 0; b < 2; b++) for (int j = 0; j < LIN - 1; j++) begin
          checks++;
          if (dout[j][b] != W'(exp_q[0])) begin
            failures++;
            if (failures < 10) $display("FAIL: vector %0d ch %0d got %0h exp %0h", i - LAT, j, dout[j][b], exp_q[0]);
          end
          void'(exp_q.pop_front());
        end
      end
      in_valid = (i % 11) != 5; in_sof = in_valid && (i % 8) == 0;
      v_q.push_back(in_valid); s_q.push_back(in_valid && in_sof);
      for (int b = 0; b < 2; b++) begin
        for (int j = 0; j < LIN; j++) begin
          xv[j] = new[1];
          xv[j][0] = (i % 7 == 0) ? cfg.q[j] - 1 : u64_t'($urandom) % cfg.q[j];
          din[j][b] = W'(xv[j][0]);
        end
        rs_ref(xv, cfg.q, yv);
        for (int j = 0; j < LIN - 1; j++) exp_q.push_back(yv[j][0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
