// tb_dwt_memory -- test of the coefficient memory: writes through the
// external port and both result ports (two writes per cycle), reads on both
// read ports with the one-cycle latency, priority of the external port over
// result port 0, and read-before-write on the same address.  A shadow array in
// the testbench holds the expected contents.
module tb_dwt_memory;
  localparam int W = 16, DEPTH = 256, AW = 8;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic          ext_we = 0, we0 = 0, we1 = 0;
  logic [AW-1:0] ext_addr = '0, wa0 = '0, wa1 = '0, ra0 = '0, ra1 = '0;
  logic [W-1:0]  ext_data = '0, wd0 = '0, wd1 = '0, rd0, rd1;
  int shadow [DEPTH];
  int checks = 0, failures = 0;

  dwt_memory #(.W(W), .DEPTH(DEPTH), .AW(AW)) dut (.clk, .ext_we, .ext_addr, .ext_data,
    .we0, .wa0, .wd0, .we1, .wa1, .wd1, .ra0, .rd0, .ra1, .rd1);

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill through the external port
    for (int i = 0; i < DEPTH; i++) begin
      shadow[i] = int'($urandom % 65536);
      ext_we <= 1; ext_addr <= AW'(i); ext_data <= W'(shadow[i]);
      @(posedge clk);
    end
    ext_we <= 0;
    // random traffic: two writes and two reads per cycle
    for (int c = 0; c < 2000; c++) begin
      int a0, a1, r0a, r1a, d0, d1, e0, e1;
      a0 = int'($urandom % DEPTH);
      a1 = int'($urandom % DEPTH);
      if (a1 == a0) a1 = (a0 + 1) % DEPTH;
      r0a = ($urandom % 4 == 0) ? a0 : int'($urandom % DEPTH);
      r1a = int'($urandom % DEPTH);
      d0 = int'($urandom % 65536);
      d1 = int'($urandom % 65536);
      e0 = shadow[r0a];            // read returns the old word
      e1 = shadow[r1a];
      we0 <= ($urandom % 2) == 1; wa0 <= AW'(a0); wd0 <= W'(d0);
      we1 <= ($urandom % 2) == 1; wa1 <= AW'(a1); wd1 <= W'(d1);
      ext_we <= (c % 97) == 5;  ext_addr <= AW'(a0); ext_data <= W'(d0 ^ 16'h5a5a);
      ra0 <= AW'(r0a); ra1 <= AW'(r1a);
      @(posedge clk);
      #1;
      if (ext_we)   shadow[a0] = d0 ^ 'h5a5a;   // external port wins port 0
      else if (we0) shadow[a0] = d0;
      if (we1)      shadow[a1] = d1;
      checks += 2;
      if (int'(rd0) != e0) begin failures++; $display("FAIL rd0 @%0d = %0h exp %0h", r0a, rd0, e0); end
      if (int'(rd1) != e1) begin failures++; $display("FAIL rd1 @%0d = %0h exp %0h", r1a, rd1, e1); end
    end
    we0 <= 0; we1 <= 0; ext_we <= 0;
    // read everything back
    for (int i = 0; i < DEPTH; i++) begin
      ra0 <= AW'(i); ra1 <= AW'(DEPTH - 1 - i);
      @(posedge clk);
      #1;
      checks += 2;
      if (int'(rd0) != shadow[i]) begin failures++; $display("FAIL final @%0d", i); end
      if (int'(rd1) != shadow[DEPTH - 1 - i]) begin failures++; $display("FAIL final1 @%0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
