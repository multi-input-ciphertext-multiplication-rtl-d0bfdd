// ntt_pe: one butterfly rank of the 2-parallel pipelined (I)NTT.
//
// Each clock it takes one butterfly pair (x0, x1) of the rank and a twiddle
// factor read from its own twiddle memory of TW_DEPTH words (2^s words for
// rank s of the forward transform). The twiddle address is the pair's
// position c within the frame, shifted right by SHIFT; c counts from 0 at the
// cycle that carries in_sof.
//   INV = 0, forward (Cooley-Tukey):  y0 = x0 + w*x1,  y1 = x0 - w*x1
//   INV = 1, inverse (Gentleman-Sande with the 1/N spread over the ranks):
//            y0 = (x0 + x1)/2,  y1 = w*(x0 - x1)/2
// so the forward PE holds one modular multiplier and two modular adders, the
// inverse one a multiplier, two adders and two halving adders with their
// multiplexers. Five pipeline stages: operand/twiddle register, three Barrett
// stages, output adder (forward) or input adder then three Barrett stages
// (inverse). The twiddle memory is written through (tw_we, tw_addr,
// tw_data) by the host before use.
//
// Follows the paper's PE contents (one modular multiplier and two modular
// adders forward; multiplier, four adders and two multiplexers inverse)
// and its five pipeline stages; the stage split is this design's choice.
module ntt_pe #(
  parameter int unsigned W        = 64,
  parameter int unsigned CW       = 15,   // width of the frame position c
  parameter int unsigned TW_DEPTH = 1,
  parameter int unsigned SHIFT    = 0,
  parameter bit          INV      = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] q,
  input  logic [W:0]   mu,
  input  logic         tw_we,
  input  logic [CW:0]  tw_addr,   // local word address in the twiddle memory
  input  logic [W-1:0] tw_data,
  input  logic         in_valid,
  input  logic         in_sof,
  input  logic [W-1:0] x0,
  input  logic [W-1:0] x1,
  output logic         out_valid,
  output logic         out_sof,
  output logic [W-1:0] y0,
  output logic [W-1:0] y1
);
  import he_pkg::*;
  `include "modarith.svh"

  localparam int unsigned TAW = (TW_DEPTH > 1) ? $clog2(TW_DEPTH) : 1;

  logic [W-1:0]  tw_mem [TW_DEPTH];
  logic [CW-1:0] cnt, cur;
  logic [TAW-1:0] rd_addr;
  logic [W-1:0]  w1, a1, b1;
  logic [PE_LAT-1:0] vpipe, spipe;

  always_ff @(posedge clk) begin
    if (tw_we) tw_mem[tw_addr[TAW-1:0]] <= tw_data;
  end

  always_comb begin
    cur     = in_sof ? '0 : cnt + 1'b1;
    rd_addr = TAW'(cur >> SHIFT);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt   <= '1;
      vpipe <= '0;
      spipe <= '0;
    end else begin
      cnt   <= cur;
      vpipe <= {vpipe[PE_LAT-2:0], in_valid};
      spipe <= {spipe[PE_LAT-2:0], in_sof};
    end
  end
  assign out_valid = vpipe[PE_LAT-1];
  assign out_sof   = spipe[PE_LAT-1];

  // stage 1: operands and twiddle
  always_ff @(posedge clk) begin
    a1 <= x0;
    b1 <= x1;
    w1 <= tw_mem[rd_addr];
  end

  if (!INV) begin : g_ct
    logic [W-1:0] v4;
    logic [W-1:0] u2, u3, u4;
    modmul #(.W(W)) u_mm (.clk, .a(b1), .b(w1), .q, .mu, .y(v4));
    always_ff @(posedge clk) begin
      u2 <= a1;
      u3 <= u2;
      u4 <= u3;
      y0 <= f_madd(u4, v4, q);
      y1 <= f_msub(u4, v4, q);
    end
  end else begin : g_gs
    logic [W-1:0] s2, d2, w2, s3, s4;
    always_ff @(posedge clk) begin
      s2 <= f_mhalf(f_madd(a1, b1, q), q);
      d2 <= f_mhalf(f_msub(a1, b1, q), q);
      w2 <= w1;
      s3 <= s2;
      s4 <= s3;
      y0 <= s4;
    end
    modmul #(.W(W)) u_mm (.clk, .a(d2), .b(w2), .q, .mu, .y(y1));
  end
endmodule
