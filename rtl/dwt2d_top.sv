// dwt2d_top -- two-dimensional 9/7 discrete wavelet transform of an image
// tile: one pipelined lifting 1D-DWT, an image-sized memory and its control.
//
// Operation.  A tile of IMG_W x IMG_H signed PIX_W-bit samples (level-shifted
// pixels) is written in raster order through in_valid/in_ready.  The memory
// control then runs OCTAVES octaves of the separable transform in place: for
// each octave a row pass and a column pass over the current low-low band, the
// 1D-DWT taking one sample pair per clock.  Finally the tile of MEM_W-bit
// coefficients is streamed out in raster order on out_valid/out_coef, with the
// sub-bands in the usual layout (LL of the last octave in the top-left corner,
// then HL/LH/HH of each octave; HL top-right, LH bottom-left, HH bottom-right).
// done pulses with the last coefficient; busy is high from the end of loading
// to the end of the output stream.
//
// The 1D-DWT inside uses MEM_W bits for every internal register rather than
// the narrower widths tuned for 8-bit samples, because from the second pass on
// its input is itself a coefficient.  MEM_W = 16 holds the worst-case growth of
// an 8-bit tile over five octaves.  STRUCTURAL selects full-adder based adders;
// PIPELINED = 0 or GENERIC = 1 select the unpipelined 1D variants (see
// dwt1d_lifting).  The default is the pipelined shift-add build.
//
// Timing.  Loading takes IMG_W*IMG_H cycles, the unload the same; a line of N
// samples takes N/2 + 4 feed cycles; each pass ends with a drain of the 1D
// latency plus two cycles (22 by default; see dwt_mem_ctrl).
module dwt2d_top #(
  parameter int IMG_W      = 128,
  parameter int IMG_H      = 128,
  parameter int OCTAVES    = 5,
  parameter int PIX_W      = 8,
  parameter int MEM_W      = 16,
  parameter bit STRUCTURAL = 1'b0,
  parameter bit PIPELINED  = 1'b1,
  parameter bit GENERIC    = 1'b0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic signed [PIX_W-1:0] in_pixel,
  output logic                    out_valid,
  output logic signed [MEM_W-1:0] out_coef,
  output logic                    done,
  output logic                    busy
);
  localparam int AW    = $clog2(IMG_W * IMG_H);
  localparam int KW    = $clog2(((IMG_W > IMG_H) ? IMG_W : IMG_H) / 2 + 1);
  localparam int LW    = $clog2(((IMG_W > IMG_H) ? IMG_W : IMG_H) + 1);
  localparam int TAG_W = 1 + LW + KW;

  logic             ext_we;
  logic [AW-1:0]    ext_addr, ra0, ra1, wa0, wa1;
  logic             we0, we1;
  logic [MEM_W-1:0] rd0, rd1;
  logic [TAG_W-1:0] tag_to_core, tag_from_core;
  logic signed [MEM_W-1:0] low, high;

  dwt_mem_ctrl #(.IMG_W(IMG_W), .IMG_H(IMG_H), .OCTAVES(OCTAVES),
                 .AW(AW), .KW(KW), .LW(LW), .TAG_W(TAG_W)) u_ctrl (
    .clk, .rst_n,
    .in_valid, .in_ready,
    .ext_we, .ext_addr,
    .ra0, .ra1, .we0, .wa0, .we1, .wa1,
    .core_tag_o(tag_to_core), .core_tag_i(tag_from_core),
    .out_valid, .done, .busy);

  dwt_memory #(.W(MEM_W), .DEPTH(IMG_W * IMG_H), .AW(AW)) u_mem (
    .clk,
    .ext_we, .ext_addr, .ext_data(MEM_W'(in_pixel)),
    .we0, .wa0, .wd0(low),
    .we1, .wa1, .wd1(high),
    .ra0, .rd0, .ra1, .rd1);

  dwt1d_lifting #(.W_IN(MEM_W), .W_ALPHA(MEM_W), .W_BETA(MEM_W), .W_GAMMA(MEM_W),
                  .W_DELTA(MEM_W), .W_LOW(MEM_W), .W_HIGH(MEM_W),
                  .STRUCTURAL(STRUCTURAL), .PIPELINED(PIPELINED),
                  .GENERIC(GENERIC), .TAG_W(TAG_W)) u_dwt (
    .clk, .rst_n,
    .in_even(signed'(rd0)), .in_odd(signed'(rd1)), .in_tag(tag_to_core),
    .out_low(low), .out_high(high), .out_tag(tag_from_core));

  assign out_coef = signed'(rd0);
endmodule
