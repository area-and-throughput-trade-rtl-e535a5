// dwt1d_lifting -- pipelined one-dimensional 9/7 discrete wavelet transform in
// lifting form, with constant multipliers built from shifted additions.
//
// Function.  The input is a stream of sample pairs x[2n] (even data-flow) and
// x[2n+1] (odd data-flow), one pair per clock.  The transform applies the four
// lifting steps of the factorised Daubechies 9/7 filter pair and the final
// scaling, all with integer constants C/256 and an 8-bit arithmetic right
// shift after each multiplication:
//
//   d[n]  = o[n]  + (ALPHA*(e[n]  + e[n+1])  >>> 8)     odd  data-flow
//   s[n]  = e[n]  + (BETA *(d[n-1]+ d[n])    >>> 8)     even data-flow
//   d2[n] = d[n]  + (GAMMA*(s[n]  + s[n+1])  >>> 8)     odd  data-flow
//   s2[n] = s[n]  + (DELTA*(d2[n-1]+d2[n])   >>> 8)     even data-flow
//   low[n]  = (INV_K * s2[n]) >>> 8                     low-pass output
//   high[n] = (NEG_K * d2[n]) >>> 8                     high-pass output
//
// Every intermediate value is stored in a register of the width given by the
// W_* parameters and wraps modulo that width.  The defaults are the widths
// derived for 8-bit image samples (8, 11, 9, 9, 10, 10 and 9 bits); they cover
// the value ranges observed on natural images, not the arithmetic worst case,
// so an adversarial input can wrap.  The 2D transform instantiates this module
// with all widths set to its memory word width.
//
// Structure.  The register names of the classic lifting data-path are kept:
// r0/r1 capture the input pair, r2/r3 hold the previous pair; each lifting step
// is a shift_add_mult (pre-add of the two neighbours, shift-add tree with the
// same-flow sample accumulated at bit 8, one addition per pipeline stage), and
// delay_lines replace the single registers r4, r7-r10 and r13 so that the
// operands of every step stay aligned with the deeper pipelined multipliers.
// With the default constants the steps take 4 cycles each and the scalings 3
// (1/k is padded by one stage to line up with -k).
//
// Timing.  LATENCY = 1 + 4 + 4 + 4 + 4 + 3 = 20 cycles: the pair presented in
// cycle t, with index j, yields out_low/out_high with index j-2 in cycle
// t + LATENCY.  Along the data-flow a sample passes 22 register stages to its
// own coefficient; the published figure for this pipeline is 21 stages, a
// difference of one register rank that this design does not resolve.
// in_tag is delayed by LATENCY and can carry a valid bit and an index; it is
// the only state that is reset.  Boundary extension (mirroring) is the
// caller's job: for a line of N samples feed pairs j = -2 .. N/2+1 of the
// symmetrically extended line; outputs for j >= 2 are the N/2 low and N/2 high
// coefficients.
//
// Variants.  The function is identical in all of them; only the timing and
// the hardware differ.
//   PIPELINED=1 STRUCTURAL=0  pipelined shift-add, behavioural adders (default)
//   PIPELINED=1 STRUCTURAL=1  pipelined shift-add, full-adder adders
//   PIPELINED=0 STRUCTURAL=0  one register per step, shift-add, behavioural
//   PIPELINED=0 STRUCTURAL=1  one register per step, shift-add, full adders
//   GENERIC=1                 one register per step, integer multipliers
// SHARE_BETA=1 (default) builds beta with 7 adders instead of 8 by re-using
// one adder result; SHARE_BETA=0 uses the plain tree.  Both have the same
// latency.  Without pipelining every step and each scaling takes one cycle: LATENCY =
// 6 cycles, 8 register ranks from a sample to its coefficient -- the 8-stage
// pipeline of the unpipelined architectures.
module dwt1d_lifting
  import dwt_pkg::*;
#(
  parameter int W_IN    = 8,    // input samples
  parameter int W_ALPHA = 11,   // after alpha, before gamma
  parameter int W_BETA  = 9,    // after beta, before delta
  parameter int W_GAMMA = 9,    // after gamma, before -k
  parameter int W_DELTA = 10,   // after delta, before 1/k
  parameter int W_LOW   = 10,   // low-pass output
  parameter int W_HIGH  = 9,    // high-pass output
  parameter int ALPHA   = C_ALPHA,
  parameter int BETA    = C_BETA,
  parameter int GAMMA   = C_GAMMA,
  parameter int DELTA   = C_DELTA,
  parameter int NEG_K   = C_NEG_K,
  parameter int INV_K   = C_INV_K,
  parameter bit STRUCTURAL = 1'b0,
  parameter bit PIPELINED  = 1'b1,
  parameter bit GENERIC    = 1'b0,
  parameter bit SHARE_BETA = 1'b1,  // beta with 7 adders (one result re-used)
  parameter int TAG_W   = 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [W_IN-1:0]   in_even,
  input  logic signed [W_IN-1:0]   in_odd,
  input  logic [TAG_W-1:0]         in_tag,
  output logic signed [W_LOW-1:0]  out_low,
  output logic signed [W_HIGH-1:0] out_high,
  output logic [TAG_W-1:0]         out_tag
);
  localparam bit PIPE = PIPELINED && !GENERIC;
  localparam int LA  = mult_latency(ALPHA, 1'b1, 1'b1, PIPE);
  localparam int LB  = mult_latency(BETA, 1'b1, 1'b1, PIPE);
  localparam int LG  = mult_latency(GAMMA, 1'b1, 1'b1, PIPE);
  localparam int LD  = mult_latency(DELTA, 1'b1, 1'b1, PIPE);
  localparam int LKI = mult_latency(INV_K, 1'b0, 1'b0, PIPE);
  localparam int LKN = mult_latency(NEG_K, 1'b0, 1'b0, PIPE);
  localparam int LK  = (LKI > LKN) ? LKI : LKN;
  localparam int LATENCY = 1 + LA + LB + LG + LD + LK;

  // ---- input pair and previous pair -----------------------------------------
  logic signed [W_IN-1:0] r0, r1, r2, r3;
  always_ff @(posedge clk) begin
    r0 <= in_even;
    r1 <= in_odd;
    r2 <= r0;
    r3 <= r1;
  end

  // ---- alpha: odd flow updated from two even neighbours ----------------------
  logic signed [W_ALPHA-1:0] d_a, d_a1, d_a_acc;
  shift_add_mult #(.IN_W(W_IN), .ACC_W(W_IN), .OUT_W(W_ALPHA), .COEF(ALPHA),
                   .PREADD(1'b1), .ACC(1'b1), .PAD(0), .STRUCTURAL(STRUCTURAL),
                   .PIPELINED(PIPELINED), .GENERIC(GENERIC))
    u_alpha (.clk, .a(r0), .b(r2), .acc(r3), .y(d_a));

  // ---- beta: even flow updated from two odd neighbours ----------------------
  logic signed [W_IN-1:0]   e_b;       // even sample aligned with d_a (r4)
  logic signed [W_BETA-1:0] s_b, s_b1, s_b_acc;
  delay_line #(.W(W_ALPHA), .N(1))  u_r7 (.clk, .rst_n, .d(d_a), .q(d_a1));
  delay_line #(.W(W_IN),    .N(LA)) u_r4 (.clk, .rst_n, .d(r2),  .q(e_b));
  shift_add_mult #(.IN_W(W_ALPHA), .ACC_W(W_IN), .OUT_W(W_BETA), .COEF(BETA),
                   .PREADD(1'b1), .ACC(1'b1), .PAD(0), .STRUCTURAL(STRUCTURAL),
                   .PIPELINED(PIPELINED), .GENERIC(GENERIC), .SHARE(SHARE_BETA))
    u_beta (.clk, .a(d_a), .b(d_a1), .acc(e_b), .y(s_b));

  // ---- gamma: odd flow updated from two even neighbours ----------------------
  logic signed [W_GAMMA-1:0] d_g, d_g1, d_g_out;
  delay_line #(.W(W_BETA),  .N(1))  u_r8 (.clk, .rst_n, .d(s_b),  .q(s_b1));
  delay_line #(.W(W_ALPHA), .N(LB)) u_r9 (.clk, .rst_n, .d(d_a1), .q(d_a_acc));
  shift_add_mult #(.IN_W(W_BETA), .ACC_W(W_ALPHA), .OUT_W(W_GAMMA), .COEF(GAMMA),
                   .PREADD(1'b1), .ACC(1'b1), .PAD(0), .STRUCTURAL(STRUCTURAL),
                   .PIPELINED(PIPELINED), .GENERIC(GENERIC))
    u_gamma (.clk, .a(s_b), .b(s_b1), .acc(d_a_acc), .y(d_g));

  // ---- delta: even flow updated from two odd neighbours ----------------------
  logic signed [W_DELTA-1:0] s_d;
  delay_line #(.W(W_GAMMA), .N(1))  u_r13 (.clk, .rst_n, .d(d_g),  .q(d_g1));
  delay_line #(.W(W_BETA),  .N(LG)) u_r10 (.clk, .rst_n, .d(s_b1), .q(s_b_acc));
  shift_add_mult #(.IN_W(W_GAMMA), .ACC_W(W_BETA), .OUT_W(W_DELTA), .COEF(DELTA),
                   .PREADD(1'b1), .ACC(1'b1), .PAD(0), .STRUCTURAL(STRUCTURAL),
                   .PIPELINED(PIPELINED), .GENERIC(GENERIC))
    u_delta (.clk, .a(d_g), .b(d_g1), .acc(s_b_acc), .y(s_d));

  // ---- scaling: low = s2 * 1/k, high = d2 * (-k) -----------------------------
  delay_line #(.W(W_GAMMA), .N(LD)) u_hi_align (.clk, .rst_n, .d(d_g), .q(d_g_out));
  shift_add_mult #(.IN_W(W_DELTA), .ACC_W(1), .OUT_W(W_LOW), .COEF(INV_K),
                   .PREADD(1'b0), .ACC(1'b0), .PAD(LK - LKI), .STRUCTURAL(STRUCTURAL),
                   .PIPELINED(PIPELINED), .GENERIC(GENERIC))
    u_inv_k (.clk, .a(s_d), .b('0), .acc('0), .y(out_low));
  shift_add_mult #(.IN_W(W_GAMMA), .ACC_W(1), .OUT_W(W_HIGH), .COEF(NEG_K),
                   .PREADD(1'b0), .ACC(1'b0), .PAD(LK - LKN), .STRUCTURAL(STRUCTURAL),
                   .PIPELINED(PIPELINED), .GENERIC(GENERIC))
    u_neg_k (.clk, .a(d_g_out), .b('0), .acc('0), .y(out_high));

  // ---- tag / valid delay -----------------------------------------------------
  delay_line #(.W(TAG_W), .N(LATENCY), .RESET(1'b1)) u_tag (
    .clk, .rst_n, .d(in_tag), .q(out_tag));
endmodule
