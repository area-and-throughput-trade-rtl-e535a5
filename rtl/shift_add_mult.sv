// shift_add_mult -- pipelined multiplication by a lifting constant using only
// shifted additions, with optional pre-add and accumulate.
//
//   y = acc + ((COEF * (a + b)) >>> 8)        (PREADD = 1, ACC = 1)
//   y = (COEF * a) >>> 8                      (PREADD = 0, ACC = 0)
//
// computed exactly as (COEF*(a+b) + (acc << 8)) >>> 8, i.e. the sum is
// truncated towards minus infinity by the final 8-bit arithmetic shift, and the
// result is kept modulo 2^OUT_W (the width of the register that receives it).
//
// How it works.  COEF is read as a 10-bit two's-complement word.  Every set bit
// k gives one partial product (a+b) << k; bit 9 weighs -512, so that partial
// product is subtracted.  The accumulator operand, when present, is one more
// term placed at bit 8, so that it lines up with the integer part of the
// product.  The terms are summed by a binary tree of adders with a register
// after every tree level: each pipeline stage holds exactly one addition.  The
// pre-add a+b, when present, is a stage of its own.  For the constants of the
// 9/7 transform this gives 6 adders for alpha, 8 for beta, 5 for gamma and
// delta, 4 for -k and 2 for 1/k.
//
// Timing.  y follows a, b and acc by LATENCY = PREADD + ceil(log2(terms)) + PAD
// clock cycles; a new operand set is accepted every cycle.
//
// Variants.  PIPELINED = 0 keeps the same adders but leaves them
// combinational, with one register at the output (LATENCY = 1 + PAD): the
// unpipelined shift-add form.  GENERIC = 1 replaces the shift-add tree by a
// plain integer multiplication C*(a+b) + (acc << 8), also with one output
// register; the result is bit-identical.  SHARE = 1 re-uses one adder result:
// a run of four set bits k..k+3 is summed as t + (t << 2), t = x<<k + x<<k+1,
// which takes beta from 8 adders to 7 at the same latency.  PAD adds plain
// delay registers at the output so that parallel multipliers can be aligned.
// There is no reset: the pipeline holds only data; validity is tracked by the
// caller.
//
// Choices of this design: the order of summation (a balanced tree, the
// negative partial product paired with the lowest positive one) and a single
// internal width wide enough for the exact sum; one of the beta adders could
// be shared between partial products, which is not done here.
module shift_add_mult
  import dwt_pkg::*;
#(
  parameter int IN_W       = 8,
  parameter int ACC_W      = 8,
  parameter int OUT_W      = 11,
  parameter int COEF       = C_ALPHA,
  parameter bit PREADD     = 1'b1,
  parameter bit ACC        = 1'b1,
  parameter int PAD        = 0,
  parameter bit STRUCTURAL = 1'b0,
  parameter bit PIPELINED  = 1'b1,
  parameter bit GENERIC    = 1'b0,
  parameter bit SHARE      = 1'b0
) (
  input  logic                    clk,
  input  logic signed [IN_W-1:0]  a,
  input  logic signed [IN_W-1:0]  b,      // used only when PREADD = 1
  input  logic signed [ACC_W-1:0] acc,    // used only when ACC = 1
  output logic signed [OUT_W-1:0] y
);
  localparam logic [COEF_W-1:0] CB = COEF_W'(COEF);
  localparam bit NEG   = CB[COEF_W-1];
  localparam int NPP   = coef_terms(COEF);              // partial products
  localparam int NT    = NPP + int'(ACC);               // terms in the tree
  localparam int L     = tree_levels(NT);
  localparam int PW    = IN_W + int'(PREADD);           // width of a(+b)
  localparam int SW_P  = PW + COEF_W + 1;
  localparam int SW_A  = ACC_W + FRAC_BITS + 1;
  localparam int SUM_W = ((SW_P > SW_A) ? SW_P : SW_A) + 1;
  localparam bit PIPE    = PIPELINED && !GENERIC;
  localparam int LATENCY = mult_latency(COEF, PREADD, ACC, PIPE) + PAD;

  // Bit positions of the terms, 4 bits each, term k in POS[4k +: 4]: the
  // lowest positive bit first, then the negative sign bit (so that the first
  // adder subtracts it), then the other positive bits from low to high.
  function automatic logic [4*COEF_W-1:0] term_positions();
    logic [4*COEF_W-1:0] pos;
    int n;
    int first;
    pos = '0;
    n = 0;
    first = -1;
    for (int i = COEF_W - 2; i >= 0; i--)
      if (CB[i]) first = i;
    pos[4*n +: 4] = 4'(first);
    n++;
    if (NEG) begin
      pos[4*n +: 4] = 4'(COEF_W - 1);
      n++;
    end
    for (int i = 0; i < COEF_W - 1; i++)
      if (CB[i] && i > first) begin
        pos[4*n +: 4] = 4'(i);
        n++;
      end
    return pos;
  endfunction

  localparam logic [4*COEF_W-1:0] POS = term_positions();

  // Shared-adder form: the lowest run of four set bits k..k+3 (below the sign
  // bit) is summed as t + (t << 2) with t = (x << k) + (x << k+1).
  function automatic int run4_pos();
    for (int i = 0; i + 3 < COEF_W - 1; i++)
      if (CB[i] && CB[i+1] && CB[i+2] && CB[i+3]) return i;
    return -1;
  endfunction

  // n-th positive set bit outside that run
  function automatic int other_pos(int n);
    int m;
    int r;
    m = 0;
    r = run4_pos();
    for (int i = 0; i < COEF_W - 1; i++)
      if (CB[i] && !(r >= 0 && i >= r && i < r + 4)) begin
        if (m == n) return i;
        m++;
      end
    return 0;
  endfunction

  localparam int RUN = run4_pos();
  localparam int OP0 = other_pos(0);
  localparam int OP1 = other_pos(1);

  // ---- pre-add stage --------------------------------------------------------
  logic signed [PW-1:0]    p;      // a + b (or a), aligned with acc_d
  logic signed [ACC_W-1:0] acc_d;

  if (PREADD && PIPE) begin : g_pre
    logic [PW-1:0] s;
    sa_adder #(.W(PW), .SUB(1'b0), .STRUCTURAL(STRUCTURAL)) u_pre (
      .a({a[IN_W-1], a}), .b({b[IN_W-1], b}), .y(s));
    always_ff @(posedge clk) begin
      p     <= signed'(s);
      acc_d <= acc;
    end
  end else if (PREADD) begin : g_pre_comb
    logic [PW-1:0] s;
    sa_adder #(.W(PW), .SUB(1'b0), .STRUCTURAL(STRUCTURAL)) u_pre (
      .a({a[IN_W-1], a}), .b({b[IN_W-1], b}), .y(s));
    always_comb begin
      p     = signed'(s);
      acc_d = acc;
    end
  end else begin : g_nopre
    always_comb begin
      p     = a;
      acc_d = acc;
    end
  end

  // ---- adder tree, one level per pipeline stage ------------------------------
  logic [SUM_W-1:0] tree_out;

  if (!SHARE) begin : g_tree
    // g_lvl[l].v holds the values entering level l (level 0: the terms); the
    // adders of level l write g_lvl[l].sm, which is registered (or, unpipelined,
    // wired) into g_lvl[l+1].v. Each level has its own arrays.
    for (genvar l = 0; l <= L; l++) begin : g_lvl
      logic [SUM_W-1:0] v  [NT];
      logic [SUM_W-1:0] sm [NT];

      if (l == 0) begin : g_terms
        always_comb begin
          for (int k = 0; k < NT; k++) v[k] = '0;
          for (int k = 0; k < NPP; k++)
            v[k] = SUM_W'(signed'(p)) << POS[4*k +: 4];
          if (ACC) v[NPP] = SUM_W'(acc_d) << FRAC_BITS;
        end
      end else if (PIPE) begin : g_reg
        always_ff @(posedge clk)
          for (int i = 0; i < NT; i++) v[i] <= g_lvl[l-1].sm[i];
      end else begin : g_wire
        always_comb
          for (int i = 0; i < NT; i++) v[i] = g_lvl[l-1].sm[i];
      end

      for (genvar i = 0; i < NT; i++) begin : g_node
        if (l < L && i < tree_width(NT, l + 1) && 2 * i + 1 < tree_width(NT, l)) begin : g_add
          sa_adder #(.W(SUM_W), .SUB(l == 0 && i == 0 && NEG), .STRUCTURAL(STRUCTURAL)) u_add (
            .a(v[2*i]), .b(v[2*i+1]), .y(sm[i]));
        end else if (l < L && i < tree_width(NT, l + 1)) begin : g_pass
          assign sm[i] = v[2*i];
        end else begin : g_none
          assign sm[i] = '0;
        end
      end
    end
    assign tree_out = g_lvl[L].v[0];
  end else begin : g_share
    // Six tree adders (seven with the pre-add) for a constant with a run of
    // four set bits, two other positive bits and the sign bit, as beta has:
    //   level 1: t = x<<RUN + x<<RUN+1,  o0 = x<<OP0 - x<<9,  o1 = x<<OP1 + acc
    //   level 2: u = t + (t << 2),       o  = o0 + o1
    //   level 3: u + o
    logic [SUM_W-1:0] x0, x1, x2, x3, x4, x5;
    logic [SUM_W-1:0] s_t, s_o0, s_o1, s_u, s_o, s_f;
    logic [SUM_W-1:0] q_t, q_o0, q_o1, q_u, q_o;
    always_comb begin
      x0 = SUM_W'(signed'(p)) << RUN;
      x1 = SUM_W'(signed'(p)) << (RUN + 1);
      x2 = SUM_W'(signed'(p)) << OP0;
      x3 = SUM_W'(signed'(p)) << (COEF_W - 1);
      x4 = SUM_W'(signed'(p)) << OP1;
      x5 = SUM_W'(acc_d) << FRAC_BITS;
    end
    sa_adder #(.W(SUM_W), .SUB(1'b0), .STRUCTURAL(STRUCTURAL)) u_t  (.a(x0), .b(x1), .y(s_t));
    sa_adder #(.W(SUM_W), .SUB(1'b1), .STRUCTURAL(STRUCTURAL)) u_o0 (.a(x2), .b(x3), .y(s_o0));
    sa_adder #(.W(SUM_W), .SUB(1'b0), .STRUCTURAL(STRUCTURAL)) u_o1 (.a(x4), .b(x5), .y(s_o1));
    sa_adder #(.W(SUM_W), .SUB(1'b0), .STRUCTURAL(STRUCTURAL)) u_u  (.a(q_t), .b(q_t << 2), .y(s_u));
    sa_adder #(.W(SUM_W), .SUB(1'b0), .STRUCTURAL(STRUCTURAL)) u_o  (.a(q_o0), .b(q_o1), .y(s_o));
    sa_adder #(.W(SUM_W), .SUB(1'b0), .STRUCTURAL(STRUCTURAL)) u_f  (.a(q_u), .b(q_o), .y(s_f));
    if (PIPE) begin : g_reg
      always_ff @(posedge clk) begin
        q_t <= s_t;  q_o0 <= s_o0;  q_o1 <= s_o1;
        q_u <= s_u;  q_o  <= s_o;
        tree_out <= s_f;
      end
    end else begin : g_wire
      always_comb begin
        q_t = s_t;  q_o0 = s_o0;  q_o1 = s_o1;
        q_u = s_u;  q_o  = s_o;
        tree_out = s_f;
      end
    end
  end

  // ---- renormalise; output register when not pipelined; alignment delay ----
  logic signed [OUT_W-1:0] r;
  if (PIPE) begin : g_out_pipe
    assign r = OUT_W'(tree_out >> FRAC_BITS);
  end else if (!GENERIC) begin : g_out_reg
    always_ff @(posedge clk) r <= OUT_W'(tree_out >> FRAC_BITS);
  end else begin : g_out_mult
    // generic integer multiplier instead of the shift-add tree
    logic signed [SUM_W-1:0] prod;
    always_comb prod = SUM_W'(COEF) * SUM_W'(p) + (SUM_W'(acc_d) << FRAC_BITS);
    always_ff @(posedge clk) r <= OUT_W'(prod >>> FRAC_BITS);
  end

  if (PAD > 0) begin : g_pad
    logic signed [OUT_W-1:0] d [PAD];
    always_ff @(posedge clk) begin
      d[0] <= r;
      for (int k = 1; k < PAD; k++) d[k] <= d[k-1];
    end
    assign y = d[PAD-1];
  end else begin : g_nopad
    assign y = r;
  end

  // The tree needs at least two terms and the constant one positive bit.
  initial begin
    assert (NT >= 2 && NPP >= 1 + int'(NEG))
      else $error("shift_add_mult: unsupported constant %0d", COEF);
    assert (!SHARE || (RUN >= 0 && NEG && ACC && NPP == 7))
      else $error("shift_add_mult: no shared-adder form for constant %0d", COEF);
  end
endmodule
