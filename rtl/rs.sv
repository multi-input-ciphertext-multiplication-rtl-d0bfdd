// rs: one rescaling step in the coefficient (standard) domain,
//   out_j = [ q_{LIN-1}^-1 * (c_j - c_{LIN-1}) ]_{q_j},   0 <= j < LIN-1,
// dropping the last RNS channel. The last residue (below 2^W < 2 q_j) is
// first reduced mod q_j, then subtracted; qinv[j] = q_{LIN-1}^-1 mod q_j is
// precomputed. Being in the coefficient domain, no (I)NTT is needed.
// Two coefficients per clock. Latency 4 (subtract 1, Barrett 3).
//
// Follows the paper's coefficient-domain rescaling; the 4-clock latency is
// this design's.
module rs #(
  parameter int unsigned W   = 64,
  parameter int unsigned LIN = 24
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] q    [LIN-1],
  input  logic [W:0]   mu   [LIN-1],
  input  logic [W-1:0] qinv [LIN-1],
  input  logic         in_valid,
  input  logic         in_sof,
  input  logic [W-1:0] din  [LIN][2],
  output logic         out_valid,
  output logic         out_sof,
  output logic [W-1:0] dout [LIN-1][2]
);
  `include "modarith.svh"
  localparam int unsigned LAT = 4;

  logic [LAT-1:0] fv, fs;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fv <= '0;
      fs <= '0;
    end else begin
      fv <= {fv[LAT-2:0], in_valid};
      fs <= {fs[LAT-2:0], in_sof};
    end
  end
  assign out_valid = fv[LAT-1];
  assign out_sof   = fs[LAT-1];

  for (genvar j = 0; j < LIN - 1; j++) begin : g_ch
    for (genvar b = 0; b < 2; b++) begin : g_lane
      logic [W-1:0] diff;
      always_ff @(posedge clk)
        diff <= f_msub(din[j][b], f_mred(din[LIN-1][b], q[j]), q[j]);
      modmul #(.W(W)) u_mm (.clk, .a(diff), .b(qinv[j]), .q(q[j]), .mu(mu[j]), .y(dout[j][b]));
    end
  end
endmodule
