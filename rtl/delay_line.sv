// delay_line: delays a WIDTH-bit word by exactly D clock cycles.
//
// Long delays are kept in a cyclic memory of D-1 words that is read and
// written at one rotating address, followed by an output register; this is
// how the delay elements between butterfly ranks are stored (as cyclic SRAM
// rather than register chains). D = 1 is a plain register, D = 0 a wire.
// out(t) = in(t - D). The memory is not reset: what comes out during the
// first D cycles is whatever it held, which parents mark invalid.
//
// Follows the paper's replacement of register chains by cyclic memories;
// the memory-plus-register form is this design's choice.
module delay_line #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned D     = 4,
  parameter bit          CLR   = 1'b0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);
  if (D == 0) begin : g_wire
    assign dout = din;
  end else if (D == 1) begin : g_reg
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) dout <= '0;
      else        dout <= din;
    end
  end else begin : g_ram
    localparam int unsigned DEPTH = D - 1;
    localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;
    logic [WIDTH-1:0] mem [DEPTH];
    logic [AW-1:0]    ptr;
    logic [WIDTH-1:0] rd;
    logic             full;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        ptr  <= '0;
        full <= 1'b0;
      end else if (ptr == AW'(DEPTH - 1)) begin
        ptr  <= '0;
        full <= 1'b1;
      end else begin
        ptr  <= ptr + 1'b1;
      end
    end
    always_ff @(posedge clk) begin
      rd       <= mem[ptr];
      mem[ptr] <= din;
    end
    // 'full' rises with the write of the last word, one cycle before that
    // word's first read reaches rd; delay it once more to line up.
    logic full_q;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) full_q <= 1'b0;
      else        full_q <= full;
    end
    assign dout = (CLR && !full_q) ? '0 : rd;
  end
endmodule
