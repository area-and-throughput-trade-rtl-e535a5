// tb_dwt_mem_ctrl -- test of the memory control on its own, with a memory
// array and a stand-in for the 1D transform written in this testbench.
//
// The stand-in keeps the tag protocol of the real transform (pair j returns as
// coefficient k = j-2 after a fixed latency) but computes an easily predicted
// function that reaches four samples to both sides, so that the mirrored
// boundary samples matter:
//   low[k]  = x[2k] + 2*x[2k-4]        high[k] = x[2k+1] + 2*x[2k+5]
// on the symmetrically extended line.  A reference model applies the same
// function line by line, rows then columns of each octave's low band, in the
// sub-band layout, and the unloaded tile is compared with it.  A 32 x 24 tile
// with two octaves is used; the number of busy cycles is checked against
// the schedule (N/2+4 feed cycles per line, 22-cycle drain per pass with the
// real transform's latency of 20).
module tb_dwt_mem_ctrl;
  localparam int IW = 32, IH = 24, OCT = 2, NPIX = IW * IH;
  localparam int AW = $clog2(NPIX);
  localparam int KW = $clog2(IW / 2 + 1);
  localparam int LW = $clog2(IW + 1);
  localparam int TW = 1 + LW + KW;
  localparam int LAT = 20;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          in_valid = 1'b0, in_ready, ext_we, we0, we1, out_valid, done, busy;
  logic [AW-1:0] ext_addr, ra0, ra1, wa0, wa1;
  logic [TW-1:0] tag_o, tag_i;
  logic [15:0]   pix = '0;

  dwt_mem_ctrl #(.IMG_W(IW), .IMG_H(IH), .OCTAVES(OCT)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .ext_we, .ext_addr, .ra0, .ra1,
    .we0, .wa0, .we1, .wa1, .core_tag_o(tag_o), .core_tag_i(tag_i),
    .out_valid, .done, .busy);

  // ---- memory model ----------------------------------------------------------
  logic [15:0] mem [NPIX];
  logic [15:0] rd0, rd1;
  logic [15:0] lo_o, hi_o;
  always @(posedge clk) begin
    if (ext_we) mem[ext_addr] <= pix;
    if (we0) mem[wa0] <= lo_o;
    if (we1) mem[wa1] <= hi_o;
    rd0 <= mem[ra0];
    rd1 <= mem[ra1];
  end

  // ---- stand-in transform: history of 6 pairs, output delayed to LAT ----
  logic [15:0] eh [6], oh [6];          // eh[0] = newest pair
  logic [15:0] lo_p [LAT], hi_p [LAT];
  logic [TW-1:0] tg_p [LAT];
  always @(posedge clk) begin
    for (int i = 5; i > 0; i--) begin eh[i] <= eh[i-1]; oh[i] <= oh[i-1]; end
    eh[0] <= rd0;
    oh[0] <= rd1;
    // pair j is on rd0/rd1 now, eh[i] holds pair j-1-i:
    // k = j-2 -> x[2k] = eh[1], x[2k-4] = eh[3], x[2k+1] = oh[1], x[2k+5] = rd1
    lo_p[0] <= eh[1] + 16'(2 * eh[3]);
    hi_p[0] <= oh[1] + 16'(2 * rd1);
    tg_p[0] <= tag_o;
    for (int i = 1; i < LAT; i++) begin
      lo_p[i] <= lo_p[i-1]; hi_p[i] <= hi_p[i-1]; tg_p[i] <= tg_p[i-1];
    end
    if (!rst_n) for (int i = 0; i < LAT; i++) tg_p[i] <= '0;
  end
  // the tag enters the stand-in together with the pair (one cycle after
  // core_tag_o is registered, like the data); it reaches the output LAT
  // cycles after the pair
  assign tag_i = tg_p[LAT-1];
  assign lo_o  = lo_p[LAT-1];
  assign hi_o  = hi_p[LAT-1];

  // ---- reference ----------------------------------------------------------
  int img [NPIX], ref_c [NPIX], got [NPIX];
  int checks = 0, failures = 0, nout = 0, busy_cyc = 0;

  function automatic int xm(ref int x [], input int n, input int i);
    if (i < 0) i = -i;
    if (i > n - 1) i = 2 * (n - 1) - i;
    return x[i];
  endfunction

  task automatic f1d(input int n, ref int x [], output int y []);
    y = new[n];
    for (int k = 0; k < n / 2; k++) begin
      y[k]         = (xm(x, n, 2*k) + 2 * xm(x, n, 2*k - 4)) & 'hffff;
      y[n / 2 + k] = (xm(x, n, 2*k + 1) + 2 * xm(x, n, 2*k + 5)) & 'hffff;
    end
  endtask

  task automatic model();
    int x [], y [];
    for (int i = 0; i < NPIX; i++) ref_c[i] = img[i];
    for (int o = 0; o < OCT; o++) begin
      int w, h;
      w = IW >> o; h = IH >> o;
      x = new[w];
      for (int r = 0; r < h; r++) begin
        for (int c = 0; c < w; c++) x[c] = ref_c[r*IW + c];
        f1d(w, x, y);
        for (int c = 0; c < w; c++) ref_c[r*IW + c] = y[c];
      end
      x = new[h];
      for (int c = 0; c < w; c++) begin
        for (int r = 0; r < h; r++) x[r] = ref_c[r*IW + c];
        f1d(h, x, y);
        for (int r = 0; r < h; r++) ref_c[r*IW + c] = y[r];
      end
    end
  endtask

  always @(negedge clk) if (rst_n) begin
    if (busy) busy_cyc++;
    if (out_valid) begin
      if (nout < NPIX) got[nout] = int'(rd0);
      nout++;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_busy;
    for (int i = 0; i < NPIX; i++) img[i] = int'($urandom % 16);
    model();
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int i = 0; i < NPIX; i++) begin
      in_valid <= 1'b1;
      pix <= 16'(img[i]);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    in_valid <= 1'b0;
    wait (done);
    repeat (3) @(posedge clk);
    checks++;
    if (nout != NPIX) begin failures++; $display("FAIL: %0d outputs", nout); end
    for (int p = 0; p < NPIX; p++) begin
      checks++;
      if (got[p] != ref_c[p]) begin
        failures++;
        if (failures < 10) $display("FAIL (%0d,%0d) = %0d exp %0d", p / IW, p % IW, got[p], ref_c[p]);
      end
    end
    exp_busy = NPIX;
    for (int o = 0; o < OCT; o++)
      exp_busy += (IH >> o) * ((IW >> o) / 2 + 4) + (IW >> o) * ((IH >> o) / 2 + 4) + 44;
    checks++;
    if (busy_cyc != exp_busy) begin failures++; $display("FAIL: busy %0d exp %0d", busy_cyc, exp_busy); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
