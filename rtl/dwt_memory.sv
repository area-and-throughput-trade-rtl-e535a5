// dwt_memory -- image-sized coefficient memory of the 2D transform.
//
// Holds one tile of DEPTH = IMG_W*IMG_H words of W bits.  The tile is loaded
// through the external write port (input image samples), transformed in place
// (every pass reads a line of the current low-low band and writes its low and
// high halves back to the same line), and read out as transform coefficients.
//
// Ports.  Two synchronous read ports (data one cycle after the address), used
// to fetch the even and the odd sample of a pair in the same cycle, and the
// transform coefficients at the end; two write ports for the low-pass and
// high-pass result of the 1D transform.  The external image input shares write
// port 0 and has priority over it.  Writing both ports to the same address in
// one cycle is illegal and flagged by an assertion.
//
// The memory size equal to the image size follows the description of the
// architecture; the port arrangement (2 read, 2 write) is this design's choice,
// made so that the 1D transform can take one sample pair per clock.
module dwt_memory #(
  parameter int W     = 16,
  parameter int DEPTH = 128 * 128,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  // external image input
  input  logic          ext_we,
  input  logic [AW-1:0] ext_addr,
  input  logic [W-1:0]  ext_data,
  // results of the 1D transform
  input  logic          we0,
  input  logic [AW-1:0] wa0,
  input  logic [W-1:0]  wd0,
  input  logic          we1,
  input  logic [AW-1:0] wa1,
  input  logic [W-1:0]  wd1,
  // read ports
  input  logic [AW-1:0] ra0,
  output logic [W-1:0]  rd0,
  input  logic [AW-1:0] ra1,
  output logic [W-1:0]  rd1
);
  logic [W-1:0] mem [DEPTH];

  logic          p0_we;
  logic [AW-1:0] p0_a;
  logic [W-1:0]  p0_d;

  always_comb begin
    p0_we = ext_we | we0;
    p0_a  = ext_we ? ext_addr : wa0;
    p0_d  = ext_we ? ext_data : wd0;
  end

  always_ff @(posedge clk) begin
    if (p0_we) mem[p0_a] <= p0_d;
    if (we1)   mem[wa1]  <= wd1;
    rd0 <= mem[ra0];
    rd1 <= mem[ra1];
  end

  always_ff @(posedge clk)
    assert (!(p0_we && we1 && p0_a == wa1))
      else $error("dwt_memory: both write ports address %0d", wa1);
endmodule
