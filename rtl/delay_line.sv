// delay_line -- N-stage register delay for a W-bit word (N = 0: a wire).
//
// Used to line up operands of the lifting pipeline whose paths go through
// different numbers of register stages.  With RESET = 1 the stages clear to
// zero on an active-low synchronous reset (used for valid/tag bits); data
// delays are built without reset.
module delay_line #(
  parameter int W     = 8,
  parameter int N     = 1,
  parameter bit RESET = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (N == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] r [N];
    always_ff @(posedge clk) begin
      if (RESET && !rst_n) begin
        for (int k = 0; k < N; k++) r[k] <= '0;
      end else begin
        r[0] <= d;
        for (int k = 1; k < N; k++) r[k] <= r[k-1];
      end
    end
    assign q = r[N-1];
  end
endmodule
