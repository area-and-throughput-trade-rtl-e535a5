// full_adder -- one-bit full adder, the basic cell of the structurally
// described adders.
//
// s = a ^ b ^ ci, co = majority(a, b, ci).  Purely combinational.  The
// structural variants of the transform build every adder of the shift-add
// multipliers as a ripple chain of these cells (see sa_adder); the gate-level
// equations are the textbook ones, the text names the cell but not its gates.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic ci,
  output logic s,
  output logic co
);
  always_comb begin
    s  = a ^ b ^ ci;
    co = (a & b) | (a & ci) | (b & ci);
  end
endmodule
