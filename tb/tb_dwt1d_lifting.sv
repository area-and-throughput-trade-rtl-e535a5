// tb_dwt1d_lifting -- self-checking test of the pipelined 9/7 lifting 1D-DWT.
//
// Five instances are run side by side on the same stream of sample pairs:
// the pipelined builds with behavioural adders (the default) and with full
// adders, and the unpipelined builds with generic multipliers, with
// behavioural shift-add and with full-adder shift-add.  All have the default
// register widths.  A reference model in
// this file computes the lifting equations with integer multiplications,
// floor division by 256 and the same register wrap-around, and every valid
// output pair is compared with it.  The test also checks the 20-cycle latency
// of the pipelined builds, the 6-cycle latency of the unpipelined ones
// from an input pair to the output with index j-2, the one-pair-per-clock
// rate, and that a constant input gives low = input and high = 0 (within the
// rounding of the integer constants).
module tb_dwt1d_lifting;
  import dwt_pkg::*;

  localparam int NP  = 400;   // pairs of the random stream
  localparam int LAT = 20;
  localparam int TW  = 16;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic signed [7:0] ev, od;
  logic [TW-1:0]     tag_in;
  logic signed [9:0] lo_b, lo_s;
  logic signed [8:0] hi_b, hi_s;
  logic [TW-1:0]     tag_b, tag_s;

  dwt1d_lifting #(.TAG_W(TW)) dut_b (
    .clk, .rst_n, .in_even(ev), .in_odd(od), .in_tag(tag_in),
    .out_low(lo_b), .out_high(hi_b), .out_tag(tag_b));
  dwt1d_lifting #(.TAG_W(TW), .STRUCTURAL(1'b1), .SHARE_BETA(1'b0)) dut_s (
    .clk, .rst_n, .in_even(ev), .in_odd(od), .in_tag(tag_in),
    .out_low(lo_s), .out_high(hi_s), .out_tag(tag_s));

  // unpipelined variants: generic multipliers, shift-add behavioural,
  // shift-add with full adders
  localparam int LAT_U = 6;
  logic signed [9:0] lo_u [3];
  logic signed [8:0] hi_u [3];
  logic [TW-1:0]     tag_u [3];
  dwt1d_lifting #(.TAG_W(TW), .GENERIC(1'b1)) dut_g (
    .clk, .rst_n, .in_even(ev), .in_odd(od), .in_tag(tag_in),
    .out_low(lo_u[0]), .out_high(hi_u[0]), .out_tag(tag_u[0]));
  dwt1d_lifting #(.TAG_W(TW), .PIPELINED(1'b0), .SHARE_BETA(1'b0)) dut_nb (
    .clk, .rst_n, .in_even(ev), .in_odd(od), .in_tag(tag_in),
    .out_low(lo_u[1]), .out_high(hi_u[1]), .out_tag(tag_u[1]));
  dwt1d_lifting #(.TAG_W(TW), .PIPELINED(1'b0), .STRUCTURAL(1'b1)) dut_ns (
    .clk, .rst_n, .in_even(ev), .in_odd(od), .in_tag(tag_in),
    .out_low(lo_u[2]), .out_high(hi_u[2]), .out_tag(tag_u[2]));
  int first_out_u [3] = '{-1, -1, -1};
  int nout_u [3] = '{0, 0, 0};

  int checks = 0, failures = 0;
  int e [NP], o [NP];
  int d [NP], s [NP], d2 [NP], s2 [NP], lo [NP], hi [NP];

  function automatic int wrap(input int v, input int w);
    return (v <<< (32 - w)) >>> (32 - w);
  endfunction

  // Reference: lifting with exact integer products and floor shifts.
  task automatic model();
    for (int n = 0; n < NP; n++) begin
      d[n] = (n + 1 < NP) ? wrap(o[n] + ((C_ALPHA * (e[n] + e[n+1])) >>> 8), 11) : 0;
    end
    for (int n = 1; n < NP; n++) s[n]  = wrap(e[n] + ((C_BETA  * (d[n-1] + d[n])) >>> 8), 9);
    for (int n = 1; n + 1 < NP; n++) d2[n] = wrap(d[n] + ((C_GAMMA * (s[n] + s[n+1])) >>> 8), 9);
    for (int n = 2; n + 1 < NP; n++) begin
      s2[n] = wrap(s[n] + ((C_DELTA * (d2[n-1] + d2[n])) >>> 8), 10);
      lo[n] = wrap((C_INV_K * s2[n]) >>> 8, 10);
      hi[n] = wrap((C_NEG_K * d2[n]) >>> 8, 9);
    end
  endtask

  int cyc = 0;
  int first_in = -1, first_out = -1, nout = 0, last_out = -1;
  always @(posedge clk) cyc <= cyc + 1;

  // Output checker: tag = {valid, index}.
  always @(posedge clk) begin
    if (rst_n && tag_b[TW-1]) begin
      automatic int j = int'(tag_b[TW-2:0]);
      automatic int m = j - 2;
      if (first_out < 0) first_out = cyc;
      if (last_out >= 0 && cyc != last_out + 1) begin
        failures++;
        $display("FAIL: output gap at cycle %0d", cyc);
      end
      last_out = cyc;
      nout++;
      checks++;
      if (tag_s != tag_b) begin failures++; $display("FAIL: tag mismatch"); end
      if (m >= 2 && m + 2 < NP) begin
        checks += 4;
        if (int'(lo_b) != lo[m] || int'(hi_b) != hi[m]) begin
          failures++;
          $display("FAIL behav m=%0d low %0d exp %0d high %0d exp %0d", m, lo_b, lo[m], hi_b, hi[m]);
        end
        if (int'(lo_s) != lo[m] || int'(hi_s) != hi[m]) begin
          failures++;
          $display("FAIL struct m=%0d low %0d exp %0d high %0d exp %0d", m, lo_s, lo[m], hi_s, hi[m]);
        end
      end
    end
  end

  always @(posedge clk) begin
    for (int v = 0; v < 3; v++)
      if (rst_n && tag_u[v][TW-1]) begin
        automatic int m = int'(tag_u[v][TW-2:0]) - 2;
        if (first_out_u[v] < 0) first_out_u[v] = cyc;
        nout_u[v]++;
        if (m >= 2 && m + 2 < NP) begin
          checks += 2;
          if (int'(lo_u[v]) != lo[m] || int'(hi_u[v]) != hi[m]) begin
            failures++;
            $display("FAIL unpipelined variant %0d m=%0d low %0d exp %0d high %0d exp %0d",
                     v, m, lo_u[v], lo[m], hi_u[v], hi[m]);
          end
        end
      end
  end

  initial begin
    // watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < NP; n++) begin
      if (n < 100) begin         // constant block, checked below
        e[n] = 100; o[n] = 100;
      end else if (n < 250) begin // full-range random
        e[n] = int'($signed(8'($urandom))); o[n] = int'($signed(8'($urandom)));
      end else begin              // smooth ramp with small noise
        e[n] = (2*n % 200) - 100 + int'($urandom % 5);
        o[n] = (2*n % 200) - 99 + int'($urandom % 5);
      end
    end
    model();
    ev = '0; od = '0; tag_in = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < NP; n++) begin
      ev <= 8'(e[n]); od <= 8'(o[n]);
      tag_in <= {1'b1, 15'(n)};
      if (n == 0) first_in = cyc;
      @(posedge clk);
    end
    tag_in <= '0;
    repeat (LAT + 5) @(posedge clk);
    // latency: the first pair is sampled one edge after it is driven
    checks++;
    if (first_out - first_in != LAT + 1) begin
      failures++;
      $display("FAIL: latency %0d, expected %0d", first_out - first_in - 1, LAT);
    end
    checks++;
    if (nout != NP) begin failures++; $display("FAIL: %0d outputs, expected %0d", nout, NP); end
    for (int v = 0; v < 3; v++) begin
      checks += 2;
      if (first_out_u[v] - first_in != LAT_U + 1) begin
        failures++;
        $display("FAIL: variant %0d latency %0d, expected %0d", v, first_out_u[v] - first_in - 1, LAT_U);
      end
      if (nout_u[v] != NP) begin failures++; $display("FAIL: variant %0d gave %0d outputs", v, nout_u[v]); end
    end
    // a flat input must give low = input and high = 0 (the constants are
    // rounded, so one or two LSBs of error are allowed)
    for (int m = 10; m < 90; m++) begin
      checks++;
      if (lo[m] < 98 || lo[m] > 103 || hi[m] < -2 || hi[m] > 2) begin
        failures++;
        $display("FAIL: flat input m=%0d low=%0d high=%0d", m, lo[m], hi[m]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
