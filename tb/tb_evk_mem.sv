// tb_evk_mem: self-checking test of one channel's evaluation-key memory.
//
// Writes random key words (four polynomials, two coefficients each) to
// every address of a reduced N = 64 memory, then reads them back in a
// scrambled order while writing nothing, and checks every read word one
// cycle after its address (the memory's registered read latency). A second
// pass overwrites half the addresses and checks that only those changed.
module tb_evk_mem;
  localparam int N = 64;
  localparam int W = 64;
  localparam int A = $clog2(N) - 1;

  logic clk = 0;
  always #5 clk = ~clk;
  logic         we;
  logic [A-1:0] waddr, raddr;
  logic [W-1:0] wdata [4][2];
  logic [W-1:0] rdata [4][2];

  evk_mem #(.N(N), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] model [N/2][4][2];

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_all(input int stride);
    for (int i = 0; i <= N / 2; i++) begin
      @(negedge clk);
      if (i > 0) begin
        int ad = ((i - 1) * stride) % (N / 2);
        for (int e = 0; e < 4; e++) for (int b = 0; b < 2; b++) begin
          checks++;
          if (rdata[e][b] != model[ad][e][b]) begin
            failures++;
            $display("FAIL: addr %0d poly %0d lane %0d got %0h exp %0h", ad, e, b,
                     rdata[e][b], model[ad][e][b]);
          end
        end
      end
      raddr = A'((i * stride) % (N / 2));
    end
  endtask

  initial begin
    we = 0; waddr = 0; raddr = 0;
    for (int e = 0; e < 4; e++) for (int b = 0; b < 2; b++) wdata[e][b] = 0;
    for (int pass = 0; pass < 2; pass++) begin
      for (int ad = 0; ad < N / 2; ad++) begin
        if (pass == 1 && ad % 2 == 0) continue;
        @(negedge clk);
        we = 1; waddr = A'(ad);
        for (int e = 0; e < 4; e++) for (int b = 0; b < 2; b++) begin
          wdata[e][b] = {32'($urandom), 32'($urandom)};
          model[ad][e][b] = wdata[e][b];
        end
      end
      @(negedge clk) we = 0;
      read_all(pass == 0 ? 1 : 5);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
