// commutator: delay-commutator between two butterfly ranks of the
// 2-parallel (I)NTT.
//
// The two lanes of the incoming stream carry butterfly partners whose array
// indices differ in one bit; the next rank needs partners that differ in the
// bit held by bit Q of the frame position c (D = 2^Q). The lower lane is
// delayed by D, both lanes pass a 2x2 switch that crosses them (swap) while bit Q
// of c is 1, and the upper lane is delayed by D after the switch. Seen at
// the output (position c' = c - D) the lane bit and bit Q of the position
// have traded places; everything else is unchanged. Latency: D cycles.
// Frames must either follow back to back (N/2 cycles apart) or leave at least
// D idle cycles after the previous frame, because the switch phase restarts
// at in_sof.
//
// The paper only says delay elements and multiplexers sit between the PEs
// and that the delays are cyclic memories; the exact switch schedule here is
// this design's own derivation.
module commutator #(
  parameter int unsigned W  = 64,
  parameter int unsigned CW = 15,
  parameter int unsigned Q  = 0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic         in_sof,
  input  logic [W-1:0] x0,
  input  logic [W-1:0] x1,
  output logic         out_valid,
  output logic         out_sof,
  output logic [W-1:0] y0,
  output logic [W-1:0] y1
);
  localparam int unsigned D = 1 << Q;

  logic [CW-1:0] cnt, cur;
  logic [W-1:0]  x1_d, sw_up, sw_lo;
  logic          swap;

  always_comb begin
    cur   = in_sof ? '0 : cnt + 1'b1;
    swap = cur[Q];
    sw_up = swap ? x1_d : x0;
    sw_lo = swap ? x0   : x1_d;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt <= '1;
    else        cnt <= cur;
  end

  delay_line #(.WIDTH(W), .D(D)) u_dlo (.clk, .rst_n, .din(x1),    .dout(x1_d));
  delay_line #(.WIDTH(W), .D(D)) u_dup (.clk, .rst_n, .din(sw_up), .dout(y0));
  delay_line #(.WIDTH(2), .D(D), .CLR(1'b1)) u_dfl (.clk, .rst_n, .din({in_valid, in_sof}),
                                        .dout({out_valid, out_sof}));
  assign y1 = sw_lo;
endmodule
