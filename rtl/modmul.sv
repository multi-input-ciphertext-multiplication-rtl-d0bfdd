// modmul: W-bit modular multiplier y = a*b mod q using Barrett reduction,
// in three pipeline stages so that one W x W multiplier sits in each stage.
//
//   stage 1: x  = a*b                                  (2W bits)
//   stage 2: q3 = ((x >> (W-1)) * mu) >> (W+1)          (estimate of x/q)
//   stage 3: r  = x - q3*q, then at most two subtractions of q
// mu = floor(2^(2W) / q) is precomputed by the host. The modulus must satisfy
// 2^(W-1) <= q < 2^W; then any product x < 2^(2W) leaves 0 <= r < 3q, so b
// may be any W-bit value, not only a residue of q. q and mu travel down the
// pipeline with the operands, so the modulus may change from one cycle to the
// next. Latency: 3 cycles (MM_LAT). The three-stage split follows the paper's
// Barrett multiplier; the exact cut points are this design's choice.
module modmul #(
  parameter int unsigned W = 64
) (
  input  logic         clk,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] q,
  input  logic [W:0]   mu,
  output logic [W-1:0] y
);
  logic [2*W-1:0] x1;
  logic [W+1:0]   xlo2;
  logic [W:0]     q3_2;
  logic [2*W+1:0] est;
  logic [W+1:0]   r;
  logic [2*W:0]   qq;
  logic [W-1:0]   q1, q2;
  logic [W:0]     mu1;

  always_comb est = {1'b0, x1[2*W-1:W-1]} * {{(W+1){1'b0}}, mu1};

  always_comb begin
    qq = {{W{1'b0}}, q3_2} * {{(W+1){1'b0}}, q2};
    r  = xlo2 - qq[W+1:0];
    if (r >= {1'b0, q2, 1'b0})   r = r - {1'b0, q2, 1'b0};
    else if (r >= {2'b00, q2})   r = r - {2'b00, q2};
  end

  always_ff @(posedge clk) begin
    x1   <= a * b;
    q1   <= q;
    mu1  <= mu;
    q2   <= q1;
    xlo2 <= x1[W+1:0];
    q3_2 <= est[2*W+1:W+1];
    y    <= r[W-1:0];
  end
endmodule
