// tb_dwt2d_small -- end-to-end test of the 2D transform on a small, non-square
// tile (32 x 48, two octaves) with the unpipelined full-adder build of the 1D
// transform (6-cycle latency, so each pass drains in 8 cycles).
//
// Two tiles are pushed through: a random tile (full 8-bit range, worst case for
// word growth) and a smooth gradient tile.  Input samples are offered with
// random gaps to exercise the in_valid/in_ready handshake.  A reference model
// in this file computes the same separable integer lifting transform with the
// classic per-step symmetric boundary rule (the neighbour beyond an end is
// its mirror image, which for whole-sample symmetric extension is the end
// value itself) and compares every output coefficient.  It also checks:
//   - the number of cycles the transform is busy, against the schedule of the
//     memory control (N/2+4 feed cycles per line, 8 cycles of pipeline drain per
//     pass, then one cycle per output coefficient);
//   - that no intermediate value of the reference needed more than 16 bits;
//   - that every mechanism happened: each octave's row and column pass, reads
//     of mirrored samples at the start and at the end of a line, stalls of
//     the input handshake, and the done pulse of each tile.
module tb_dwt2d_small;
  import dwt_pkg::*;

  localparam int IW   = 32;
  localparam int IH   = 48;
  localparam int OCT  = 2;
  localparam int NPIX = IW * IH;
  localparam int MW   = 16;
  localparam int DRAIN = 8;     // 1D latency 6 + 2

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 in_valid = 1'b0;
  logic                 in_ready;
  logic signed [7:0]    in_pixel = '0;
  logic                 out_valid, done, busy;
  logic signed [MW-1:0] out_coef;

  dwt2d_top #(.IMG_W(IW), .IMG_H(IH), .OCTAVES(OCT), .STRUCTURAL(1'b1), .PIPELINED(1'b0)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_pixel,
                 .out_valid, .out_coef, .done, .busy);

  int checks = 0, failures = 0, overflows = 0;
  int img [NPIX];
  int ref_c [NPIX];
  int got [NPIX];
  int nout;

  function automatic int wrap(input int v, input int w);
    return (v <<< (32 - w)) >>> (32 - w);
  endfunction

  function automatic int chk(input int v);
    if (wrap(v, MW) != v) overflows++;
    return wrap(v, MW);
  endfunction

  // 1D integer lifting of line x[0..n-1] with symmetric boundaries.
  task automatic lift1d(input int n, ref int x [], output int y []);
    int h;
    int e [], o [], d [], s [], d2 [], s2 [];
    h = n / 2;
    e = new[h]; o = new[h]; d = new[h]; s = new[h]; d2 = new[h]; s2 = new[h];
    y = new[n];
    for (int k = 0; k < h; k++) begin e[k] = x[2*k]; o[k] = x[2*k+1]; end
    for (int k = 0; k < h; k++)
      d[k] = chk(o[k] + ((C_ALPHA * (e[k] + e[(k+1 < h) ? k+1 : h-1])) >>> 8));
    for (int k = 0; k < h; k++)
      s[k] = chk(e[k] + ((C_BETA * (d[(k > 0) ? k-1 : 0] + d[k])) >>> 8));
    for (int k = 0; k < h; k++)
      d2[k] = chk(d[k] + ((C_GAMMA * (s[k] + s[(k+1 < h) ? k+1 : h-1])) >>> 8));
    for (int k = 0; k < h; k++)
      s2[k] = chk(s[k] + ((C_DELTA * (d2[(k > 0) ? k-1 : 0] + d2[k])) >>> 8));
    for (int k = 0; k < h; k++) begin
      y[k]     = chk((C_INV_K * s2[k]) >>> 8);
      y[h + k] = chk((C_NEG_K * d2[k]) >>> 8);
    end
  endtask

  task automatic model();
    int x [], y [];
    for (int i = 0; i < NPIX; i++) ref_c[i] = img[i];
    for (int o = 0; o < OCT; o++) begin
      int w, hh;
      w = IW >> o; hh = IH >> o;
      x = new[w];
      for (int r = 0; r < hh; r++) begin
        for (int c = 0; c < w; c++) x[c] = ref_c[r*IW + c];
        lift1d(w, x, y);
        for (int c = 0; c < w; c++) ref_c[r*IW + c] = y[c];
      end
      x = new[hh];
      for (int c = 0; c < w; c++) begin
        for (int r = 0; r < hh; r++) x[r] = ref_c[r*IW + c];
        lift1d(hh, x, y);
        for (int r = 0; r < hh; r++) ref_c[r*IW + c] = y[r];
      end
    end
  endtask

  function automatic int expected_busy();
    int t;
    t = 0;
    for (int o = 0; o < OCT; o++) begin
      t += (IH >> o) * ((IW >> o) / 2 + 4) + DRAIN;
      t += (IW >> o) * ((IH >> o) / 2 + 4) + DRAIN;
    end
    return t + NPIX;
  endfunction

  // ---- mechanism counters ------------------------------------------------
  int pass_seen [OCT][2];
  int mirror_lo = 0, mirror_hi = 0, stalls = 0, dones = 0, busy_cyc = 0;
  always @(negedge clk) if (rst_n) begin
    if (dut.u_ctrl.state == 2'd1) begin   // S_FEED
      pass_seen[dut.u_ctrl.oct][dut.u_ctrl.col]++;
      if (dut.u_ctrl.jj < 2) mirror_lo++;
      if (dut.u_ctrl.jj > dut.u_ctrl.half + 1) mirror_hi++;
    end
    if (!in_ready && in_valid) stalls++;
    if (done) dones++;
    if (busy) busy_cyc++;
    if (out_valid) begin
      if (nout < NPIX) got[nout] = int'(out_coef);
      nout++;
    end
  end

  // ---- watchdog ----------------------------------------------------------------
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_tile(input int kind);
    int i;
    for (int p = 0; p < NPIX; p++)
      img[p] = (kind == 0) ? int'($signed(8'($urandom)))
                           : ((p % IW) + (p / IW)) / 2 - 120 + int'($urandom % 3);
    overflows = 0;
    model();
    nout = 0;
    busy_cyc = 0;
    // load, with random gaps; one extra word is offered after the tile to
    // see the handshake hold it back while the transform runs
    i = 0;
    while (i <= NPIX) begin
      in_valid <= ($urandom % 4) != 0;
      in_pixel <= 8'(img[(i < NPIX) ? i : 0]);
      @(posedge clk);
      if (in_valid && in_ready) i++;
      if (i == NPIX) begin
        in_valid <= 1'b1;          // offer one more sample: must stall
        repeat (20) @(posedge clk);
        in_valid <= 1'b0;
        break;
      end
    end
    wait (done);
    repeat (3) @(posedge clk);
    checks++;
    if (nout != NPIX) begin failures++; $display("FAIL: %0d outputs", nout); end
    for (int p = 0; p < NPIX; p++) begin
      checks++;
      if (got[p] != ref_c[p]) begin
        failures++;
        if (failures < 10)
          $display("FAIL tile %0d: coef (%0d,%0d) = %0d, expected %0d",
                   kind, p / IW, p % IW, got[p], ref_c[p]);
      end
    end
    checks++;
    if (overflows != 0) begin failures++; $display("FAIL: %0d reference values exceed %0d bits", overflows, MW); end
    checks++;
    if (busy_cyc != expected_busy()) begin
      failures++;
      $display("FAIL: busy %0d cycles, expected %0d", busy_cyc, expected_busy());
    end
    $display("tile %0d: %0d coefficients, busy %0d cycles", kind, nout, busy_cyc);
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    run_tile(0);
    run_tile(1);
    for (int o = 0; o < OCT; o++)
      for (int c = 0; c < 2; c++) begin
        checks++;
        if (pass_seen[o][c] == 0) begin failures++; $display("FAIL: octave %0d %s pass never ran", o, (c != 0) ? "column" : "row"); end
      end
    checks += 4;
    if (mirror_lo == 0) begin failures++; $display("FAIL: no start mirroring"); end
    if (mirror_hi == 0) begin failures++; $display("FAIL: no end mirroring"); end
    if (stalls == 0)    begin failures++; $display("FAIL: input never stalled"); end
    if (dones != 2)     begin failures++; $display("FAIL: %0d done pulses", dones); end
    $display("mechanisms: mirror_start=%0d mirror_end=%0d input_stalls=%0d done=%0d",
             mirror_lo, mirror_hi, stalls, dones);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
