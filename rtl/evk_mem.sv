// evk_mem: evaluation-key storage of one RNS channel for the three-input
// multiplier: the four key polynomials ek2_0, ek2_1, ek3_0, ek3_1 of that
// channel, two coefficients per word so that one read per clock keeps up
// with the 2-parallel stream. Word c holds the NTT-domain key values at the
// stream positions of pair c (see ntt), N/2 words per polynomial.
// Keys are written by the host (we/waddr/wdata) and read with one cycle of
// latency (registered output, as an SRAM macro would).
//
// Follows the paper's key storage size (2 x 2 x (L+K) x N x w bits over all
// channels). The load port and the one-cycle read are this design's choice.
module evk_mem #(
  parameter int unsigned N = 65536,
  parameter int unsigned W = 64
) (
  input  logic                   clk,
  input  logic                   we,
  input  logic [$clog2(N)-2:0]   waddr,
  input  logic [W-1:0]           wdata [4][2],
  input  logic [$clog2(N)-2:0]   raddr,
  output logic [W-1:0]           rdata [4][2]
);
  logic [8*W-1:0] mem [N/2];
  logic [8*W-1:0] wword, rword;

  always_comb begin
    for (int k = 0; k < 4; k++)
      for (int b = 0; b < 2; b++)
        wword[(2*k+b)*W +: W] = wdata[k][b];
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wword;
    rword <= mem[raddr];
  end

  always_comb begin
    for (int k = 0; k < 4; k++)
      for (int b = 0; b < 2; b++)
        rdata[k][b] = rword[(2*k+b)*W +: W];
  end
endmodule
