// tb_shift_add_mult -- test of the pipelined shift-add constant multiplier
// for all six constants of the transform, each in the configuration the 1D
// transform uses it in (lifting step: pre-add and accumulate; scaling: plain
// product).  Random full-range operands enter every cycle; each output is
// compared, exactly LATENCY cycles later, with acc + floor(C*(a+b)/256)
// computed with an integer multiplication and wrapped to the output width.
// The latencies (4 for the lifting steps, 3 for -k, 2 for 1/k) and the
// adder count are checked as well: the tree uses as many adders as the
// constant has set bits (plus pre-add) -- 6, 8, 5, 5, 4 and 2.  Beta is also
// tested in its shared-adder form (7 adders), which must give the same
// results with the same latency.
module tb_shift_add_mult;
  import dwt_pkg::*;

  localparam int N = 300;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic signed [7:0]  a8, b8, acc8;
  logic signed [10:0] a11, b11, acc11;
  logic signed [8:0]  a9, b9, acc9;
  logic signed [9:0]  a10;
  logic signed [10:0] y_alpha;
  logic signed [8:0]  y_beta, y_gamma, y_negk, y_beta_sh, y_beta_shs;
  logic signed [9:0]  y_delta, y_invk;

  shift_add_mult #(.IN_W(8),  .ACC_W(8),  .OUT_W(11), .COEF(C_ALPHA)) u_alpha (.clk, .a(a8),  .b(b8),  .acc(acc8),  .y(y_alpha));
  shift_add_mult #(.IN_W(11), .ACC_W(8),  .OUT_W(9),  .COEF(C_BETA))  u_beta  (.clk, .a(a11), .b(b11), .acc(acc8),  .y(y_beta));
  // beta with one adder result re-used (7 adders), behavioural and full-adder
  shift_add_mult #(.IN_W(11), .ACC_W(8),  .OUT_W(9),  .COEF(C_BETA), .SHARE(1'b1)) u_beta_sh (.clk, .a(a11), .b(b11), .acc(acc8), .y(y_beta_sh));
  shift_add_mult #(.IN_W(11), .ACC_W(8),  .OUT_W(9),  .COEF(C_BETA), .SHARE(1'b1), .STRUCTURAL(1'b1)) u_beta_shs (.clk, .a(a11), .b(b11), .acc(acc8), .y(y_beta_shs));
  shift_add_mult #(.IN_W(9),  .ACC_W(11), .OUT_W(9),  .COEF(C_GAMMA)) u_gamma (.clk, .a(a9),  .b(b9),  .acc(acc11), .y(y_gamma));
  shift_add_mult #(.IN_W(9),  .ACC_W(9),  .OUT_W(10), .COEF(C_DELTA)) u_delta (.clk, .a(a9),  .b(b9),  .acc(acc9),  .y(y_delta));
  shift_add_mult #(.IN_W(10), .ACC_W(1),  .OUT_W(10), .COEF(C_INV_K), .PREADD(1'b0), .ACC(1'b0)) u_invk (.clk, .a(a10), .b('0), .acc('0), .y(y_invk));
  shift_add_mult #(.IN_W(9),  .ACC_W(1),  .OUT_W(9),  .COEF(C_NEG_K), .PREADD(1'b0), .ACC(1'b0), .STRUCTURAL(1'b1)) u_negk (.clk, .a(a9), .b('0), .acc('0), .y(y_negk));

  function automatic int wrap(input int v, input int w);
    return (v <<< (32 - w)) >>> (32 - w);
  endfunction

  // stimulus history
  int h_a8 [N], h_b8 [N], h_acc8 [N], h_a11 [N], h_b11 [N], h_acc11 [N];
  int h_a9 [N], h_b9 [N], h_acc9 [N], h_a10 [N];

  int cyc = 0;

  task automatic expect_eq(input string nm, input int got, input int exp, input int n);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s n=%0d got %0d exp %0d", nm, n, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < N; n++) begin
      h_a8[n]  = int'($signed(8'($urandom)));  h_b8[n]  = int'($signed(8'($urandom)));
      h_acc8[n] = int'($signed(8'($urandom)));
      h_a11[n] = int'($signed(11'($urandom))); h_b11[n] = int'($signed(11'($urandom)));
      h_acc11[n] = int'($signed(11'($urandom)));
      h_a9[n]  = int'($signed(9'($urandom)));  h_b9[n]  = int'($signed(9'($urandom)));
      h_acc9[n] = int'($signed(9'($urandom)));
      h_a10[n] = int'($signed(10'($urandom)));
    end
    // extremes first
    h_a8[0] = -128; h_b8[0] = -128; h_acc8[0] = -128;
    h_a8[1] = 127;  h_b8[1] = 127;  h_acc8[1] = 127;
    for (int n = 0; n < N + 6; n++) begin
      int m;
      m = (n < N) ? n : N - 1;
      a8 <= 8'(h_a8[m]); b8 <= 8'(h_b8[m]); acc8 <= 8'(h_acc8[m]);
      a11 <= 11'(h_a11[m]); b11 <= 11'(h_b11[m]); acc11 <= 11'(h_acc11[m]);
      a9 <= 9'(h_a9[m]); b9 <= 9'(h_b9[m]); acc9 <= 9'(h_acc9[m]);
      a10 <= 10'(h_a10[m]);
      @(posedge clk);
      #1;
      // operand set m4 = n-3 entered 4 edges ago: lifting steps (latency 4)
      if (n >= 4 && n - 3 < N) begin
        int k;
        k = n - 3;
        expect_eq("alpha", y_alpha, wrap(h_acc8[k]  + ((C_ALPHA * (h_a8[k]  + h_b8[k]))  >>> 8), 11), k);
        expect_eq("beta",  y_beta,  wrap(h_acc8[k]  + ((C_BETA  * (h_a11[k] + h_b11[k])) >>> 8), 9),  k);
        expect_eq("beta shared", y_beta_sh, wrap(h_acc8[k] + ((C_BETA * (h_a11[k] + h_b11[k])) >>> 8), 9), k);
        expect_eq("beta shared fa", y_beta_shs, wrap(h_acc8[k] + ((C_BETA * (h_a11[k] + h_b11[k])) >>> 8), 9), k);
        expect_eq("gamma", y_gamma, wrap(h_acc11[k] + ((C_GAMMA * (h_a9[k]  + h_b9[k]))  >>> 8), 9),  k);
        expect_eq("delta", y_delta, wrap(h_acc9[k]  + ((C_DELTA * (h_a9[k]  + h_b9[k]))  >>> 8), 10), k);
      end
      if (n >= 3 && n - 2 < N) begin   // -k: latency 3
        expect_eq("neg_k", y_negk, wrap((C_NEG_K * h_a9[n-2]) >>> 8, 9), n - 2);
      end
      if (n >= 2 && n - 1 < N) begin   // 1/k: latency 2
        expect_eq("inv_k", y_invk, wrap((C_INV_K * h_a10[n-1]) >>> 8, 10), n - 1);
      end
    end
    // structure: number of partial products per constant
    checks += 6;
    if (coef_terms(C_ALPHA) != 5) failures++;
    if (coef_terms(C_BETA)  != 7) failures++;
    if (coef_terms(C_GAMMA) != 4) failures++;
    if (coef_terms(C_DELTA) != 4) failures++;
    if (coef_terms(C_NEG_K) != 5) failures++;
    if (coef_terms(C_INV_K) != 3) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
