// sa_adder -- W-bit two's-complement adder / subtractor, the node of every
// shift-add multiplier.
//
// y = a + b, or y = a - b when SUB = 1, modulo 2^W.  Combinational.
// STRUCTURAL = 0 describes the adder behaviourally, leaving the mapping (for
// example onto a fast carry chain) to synthesis; STRUCTURAL = 1 builds it as a
// ripple chain of full_adder cells, subtraction as a + ~b with carry-in 1.  The
// two forms correspond to the behavioural and the structural descriptions that
// are compared for the transform; the operands are already sign-extended to W
// bits by the caller, as the structural description requires.
module sa_adder #(
  parameter int W          = 16,
  parameter bit SUB        = 1'b0,
  parameter bit STRUCTURAL = 1'b0
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] y
);
  if (STRUCTURAL) begin : g_struct
    logic [W:0]   c;
    logic [W-1:0] bb;
    assign c[0] = SUB;
    assign bb   = SUB ? ~b : b;
    for (genvar i = 0; i < W; i++) begin : g_bit
      full_adder u_fa (.a(a[i]), .b(bb[i]), .ci(c[i]), .s(y[i]), .co(c[i+1]));
    end
  end else begin : g_behav
    always_comb y = SUB ? a - b : a + b;
  end
endmodule
