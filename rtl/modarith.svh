// Modular adder, subtractor and halver for W-bit residues, included inside
// modules that declare a parameter W. Operands are residues below the modulus fm; the
// moduli have their top bit set (2^(W-1) <= fm < 2^W), so one conditional
// correction is enough. A modular adder is an adder, a comparison and a
// multiplexer. f_mred reduces any W-bit value (below 2fm) into [0, fm).
function automatic logic [W-1:0] f_madd(input logic [W-1:0] fa, input logic [W-1:0] fb,
                                        input logic [W-1:0] fm);
  logic [W:0] fs;
  fs = {1'b0, fa} + {1'b0, fb};
  if (fs >= {1'b0, fm}) fs = fs - {1'b0, fm};
  return fs[W-1:0];
endfunction

function automatic logic [W-1:0] f_msub(input logic [W-1:0] fa, input logic [W-1:0] fb,
                                        input logic [W-1:0] fm);
  logic [W:0] fd;
  fd = {1'b0, fa} - {1'b0, fb};
  if (fa < fb) fd = fd + {1'b0, fm};
  return fd[W-1:0];
endfunction

// x/2 mod fm: an odd residue gets fm added first (fm is odd), then one shift.
function automatic logic [W-1:0] f_mhalf(input logic [W-1:0] fa, input logic [W-1:0] fm);
  logic [W:0] fs;
  fs = fa[0] ? ({1'b0, fa} + {1'b0, fm}) : {1'b0, fa};
  return fs[W:1];
endfunction

function automatic logic [W-1:0] f_mred(input logic [W-1:0] fa, input logic [W-1:0] fm);
  return (fa >= fm) ? fa - fm : fa;
endfunction
