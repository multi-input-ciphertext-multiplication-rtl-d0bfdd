// tb_modmul: self-checking test of the pipelined Barrett modular multiplier
// at its default 64-bit width.
//
// Every cycle a new (a, b, q) triple enters: random odd 64-bit moduli with
// the top bit set (the range the multiplier is specified for), operands
// below q, plus corner cases (q - 1 squared, zero, one). Each result is
// compared with a 128-bit product reduced by the % operator, taken exactly
// MM_LAT = 3 cycles after the operands, which also checks the latency.
module tb_modmul;
  import he_ref_pkg::*;
  import he_pkg::*;
  localparam int W = 64;
  localparam int NV = 2000;

  logic clk = 0;
  always #5 clk = ~clk;
  logic [W-1:0] a, b, q, y;
  logic [W:0]   mu;

  modmul #(.W(W)) dut (.*);

  int checks = 0, failures = 0;
  u64_t exp_q [$];

  initial begin : watchdog
    repeat (NV + 100) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic u64_t rnd64();
    return {32'($urandom), 32'($urandom)};
  endfunction

  initial begin
    u64_t qq, aa, bb;
    for (int i = 0; i < NV + MM_LAT; i++) begin
      @(negedge clk);
      if (i >= MM_LAT) begin
        checks++;
        if (y != exp_q[0]) begin
          failures++;
          if (failures < 10) $display("FAIL: vector %0d got %0h exp %0h", i - MM_LAT, y, exp_q[0]);
        end
        void'(exp_q.pop_front());
      end
      qq = rnd64() | 64'h8000_0000_0000_0001;
      case (i % 5)
        0: begin aa = qq - 1; bb = qq - 1; end
        1: begin aa = 0;      bb = rnd64() % qq; end
        2: begin aa = 1;      bb = rnd64() % qq; end
        default: begin aa = rnd64() % qq; bb = rnd64() % qq; end
      endcase
      if (i % 7 == 3) qq = 64'hFFFF_FFFF_FFFF_FFC5;   // largest 64-bit prime
      if (i % 7 == 4) qq = 64'h8000_0000_0000_0001;   // smallest allowed
      aa = aa % qq; bb = bb % qq;
      a = aa; b = bb; q = qq; mu = barrett_mu(qq, W);
      exp_q.push_back(mulmod(aa, bb, qq));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
