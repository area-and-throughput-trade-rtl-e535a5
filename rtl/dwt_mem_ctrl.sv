// dwt_mem_ctrl -- memory control of the 2D transform: loads a tile, runs the
// 1D transform over rows and columns of every octave in place, and streams
// the transformed tile out in sub-band order.
//
// Sequence.  LOAD: IMG_W*IMG_H samples are accepted in raster order
// (in_valid/in_ready) and written to the memory.  Then, for octave
// o = 0 .. OCTAVES-1: a ROW pass over every line of the current low-low band,
// then a COLUMN pass.  UNLOAD: the tile is read out on out_valid, one
// coefficient per cycle, and done pulses with the last one.
//
// In-place layout.  The transform is computed in the interleaved in-place
// order of lifting: a pass over a line of N samples writes low-pass
// coefficient k over sample 2k and high-pass coefficient k over sample 2k+1.
// Octave o therefore works on the samples at stride 2^o in both directions
// (the low-low band left by octave o-1).  Each write lands on a pair that has
// already been read, so a line can be transformed while it is being read and
// lines follow each other without gaps; only at the end of a pass does the
// control wait for the pipeline to drain, because the next pass reads across
// the lines just written.  At UNLOAD the addresses are mapped so that the
// coefficients come out in raster order of the usual sub-band layout (LL of
// the last octave top-left; HL top-right, LH bottom-left and HH bottom-right
// of each octave): along each axis, position p in band H of octave o,
// p = N/2^(o+1) + m, is read from index 2^o*(2m+1), position p in its low
// half from index 2^(o+1)*p, and position p of the final low band from index
// p*2^OCTAVES, where o is the octave of the sub-band the layout position
// (row, column) falls in.
//
// Boundaries.  For a line of N samples the controller feeds N/2+4 sample
// pairs, j = -2 .. N/2+1, reading x[2j] and x[2j+1] in the same cycle on the
// two read ports.  Indices outside 0..N-1 are mirrored about the end samples
// (x[-i] = x[i], x[N-1+i] = x[N-1-i]): the whole-sample symmetric extension the
// 9/7 filter needs, four samples on each side.  Pair j comes back from the
// transform LATENCY cycles later as coefficient k = j-2; those with k >= 0 are
// written back.  The last mirrored reads at the end of a line touch pairs
// that are written back only after them, as long as LATENCY > 2.
//
// Interface to the 1D transform.  core_tag_o travels with the pair (it is
// registered here to line up with the one-cycle memory read) and returns as
// core_tag_i = {valid, line, k}; the write address is formed from it, so no
// latency constant is needed.
//
// What follows the architecture description: memory control addresses the
// band to the 1D transform and the results back to memory, octave after
// octave, the memory is the size of the image and the coefficients are
// passed on after the last octave; boundary mirroring.  This design's
// choices: the interleaved in-place layout, raster order of load and unload,
// row pass before column pass, no back-pressure on the output, the tile
// size and the octave count (parameters).
module dwt_mem_ctrl #(
  parameter int IMG_W   = 128,
  parameter int IMG_H   = 128,
  parameter int OCTAVES = 5,
  parameter int AW      = $clog2(IMG_W * IMG_H),
  parameter int KW      = $clog2(((IMG_W > IMG_H) ? IMG_W : IMG_H) / 2 + 1),
  parameter int LW      = $clog2(((IMG_W > IMG_H) ? IMG_W : IMG_H) + 1),
  parameter int TAG_W   = 1 + LW + KW
) (
  input  logic             clk,
  input  logic             rst_n,
  // image input
  input  logic             in_valid,
  output logic             in_ready,
  // memory control
  output logic             ext_we,
  output logic [AW-1:0]    ext_addr,
  output logic [AW-1:0]    ra0,
  output logic [AW-1:0]    ra1,
  output logic             we0,
  output logic [AW-1:0]    wa0,
  output logic             we1,
  output logic [AW-1:0]    wa1,
  // 1D transform
  output logic [TAG_W-1:0] core_tag_o,
  input  logic [TAG_W-1:0] core_tag_i,
  // coefficient output (data is the memory's read port 0)
  output logic             out_valid,
  output logic             done,
  output logic             busy
);
  localparam int NPIX = IMG_W * IMG_H;
  localparam int CW   = $clog2(((IMG_W > IMG_H) ? IMG_W : IMG_H) + 8) + 2; // signed index
  localparam int OW   = (OCTAVES > 1) ? $clog2(OCTAVES) : 1;

  typedef enum logic [1:0] {S_LOAD, S_FEED, S_WAIT, S_UNLOAD} state_t;
  state_t state;

  logic          col;        // 0: row pass, 1: column pass
  logic [OW-1:0] oct;
  logic [CW-1:0] line;       // current row (row pass) or column (column pass)
  logic [CW-1:0] jj;         // pair counter 0 .. N/2+3  (j = jj - 2)
  logic [AW:0]   wr_cnt;     // pairs written back in the current pass
  logic [AW:0]   cnt;        // load counter
  logic [CW-1:0] ux, uy;     // unload position (column, row)

  logic [CW-1:0] n_len;      // samples per line
  logic [CW-1:0] n_lines;    // lines in this pass
  logic [CW-1:0] half;
  logic [AW:0]   pass_pairs; // result pairs of the whole pass

  always_comb begin
    n_len      = col ? CW'(IMG_H >> oct) : CW'(IMG_W >> oct);
    n_lines    = col ? CW'(IMG_W >> oct) : CW'(IMG_H >> oct);
    half       = n_len >> 1;
    pass_pairs = (AW+1)'(n_lines) * (AW+1)'(half);
  end

  // Mirror an index of the extended line into 0 .. n-1.
  function automatic logic [CW-1:0] mirror(input logic signed [CW-1:0] i,
                                           input logic [CW-1:0] n);
    logic signed [CW-1:0] last;
    last = signed'(n - 1'b1);
    if (i < 0)         return CW'(-i);
    else if (i > last) return CW'((last <<< 1) - i);
    else               return CW'(i);
  endfunction

  // Memory address of sample pos of line ln in the current octave's band.
  function automatic logic [AW-1:0] addr_of(input logic c, input logic [OW-1:0] o,
                                            input logic [CW-1:0] ln,
                                            input logic [CW-1:0] pos);
    logic [AW-1:0] rr, cc;
    rr = c ? AW'(pos) : AW'(ln);
    cc = c ? AW'(ln)  : AW'(pos);
    return ((rr << o) * AW'(IMG_W)) + (cc << o);
  endfunction

  // Octave of the sub-band that holds layout position (y, x): the first
  // octave whose high half contains y or x; OCTAVES for the final low band.
  function automatic logic [OW:0] band_oct(input logic [CW-1:0] y, input logic [CW-1:0] x);
    logic [OW:0] lev;
    lev = (OW+1)'(OCTAVES);
    for (int o = OCTAVES - 1; o >= 0; o--)
      if (y >= CW'(IMG_H >> (o + 1)) || x >= CW'(IMG_W >> (o + 1)))
        lev = (OW+1)'(o);
    return lev;
  endfunction

  // In-place index, along an axis of length n, of layout position p of a
  // band of octave lev: high half -> 2^lev*(2m+1), low half -> 2^(lev+1)*p.
  function automatic logic [CW-1:0] deint(input logic [CW-1:0] p, input int n,
                                          input logic [OW:0] lev);
    logic [CW-1:0] hb;
    hb = CW'(n) >> (lev + 1'b1);
    if (lev == (OW+1)'(OCTAVES)) return p << OCTAVES;
    else if (p >= hb)            return (((p - hb) << 1) | CW'(1)) << lev;
    else                         return p << (lev + 1'b1);
  endfunction

  // ---- read side ------------------------------------------------------------
  logic signed [CW-1:0] i_even, i_odd;
  always_comb begin
    i_even = signed'(jj << 1) - CW'(4);       // 2j = 2(jj-2)
    i_odd  = i_even + CW'(1);
    ra0 = '0;
    ra1 = '0;
    if (state == S_FEED) begin
      ra0 = addr_of(col, oct, line, mirror(i_even, n_len));
      ra1 = addr_of(col, oct, line, mirror(i_odd,  n_len));
    end else if (state == S_UNLOAD) begin
      ra0 = AW'(deint(uy, IMG_H, band_oct(uy, ux))) * AW'(IMG_W)
          + AW'(deint(ux, IMG_W, band_oct(uy, ux)));
    end
  end

  // tag of the pair being read: valid when k = jj-4 >= 0
  always_ff @(posedge clk) begin
    if (!rst_n) core_tag_o <= '0;
    else if (state == S_FEED && jj >= CW'(4))
      core_tag_o <= {1'b1, LW'(line), KW'(jj - CW'(4))};
    else
      core_tag_o <= '0;
  end

  // ---- write-back side: low to 2k, high to 2k+1 -----------------------------
  logic          wb_v;
  logic [CW-1:0] wb_k, wb_line;
  always_comb begin
    wb_v    = core_tag_i[TAG_W-1];
    wb_line = CW'(core_tag_i[KW +: LW]);
    wb_k    = CW'(core_tag_i[KW-1:0]);
    we0     = wb_v;
    we1     = wb_v;
    wa0     = addr_of(col, oct, wb_line, wb_k << 1);
    wa1     = addr_of(col, oct, wb_line, (wb_k << 1) | CW'(1));
  end

  // ---- sequencing -------------------------------------------------------------
  assign in_ready = (state == S_LOAD);
  assign ext_we   = in_valid && in_ready;
  assign ext_addr = AW'(cnt);
  assign busy     = (state != S_LOAD);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_LOAD;
      col       <= 1'b0;
      oct       <= '0;
      line      <= '0;
      jj        <= '0;
      wr_cnt    <= '0;
      cnt       <= '0;
      ux        <= '0;
      uy        <= '0;
      out_valid <= 1'b0;
      done      <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      if (wb_v) wr_cnt <= wr_cnt + 1'b1;
      unique case (state)
        S_LOAD: if (ext_we) begin
          if (cnt == (AW+1)'(NPIX - 1)) begin
            cnt    <= '0;
            state  <= S_FEED;
            col    <= 1'b0;
            oct    <= '0;
            line   <= '0;
            jj     <= '0;
            wr_cnt <= '0;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_FEED: begin
          if (jj == half + CW'(3)) begin
            jj <= '0;
            if (line == n_lines - 1'b1) begin
              line  <= '0;
              state <= S_WAIT;
            end else begin
              line <= line + 1'b1;
            end
          end else begin
            jj <= jj + 1'b1;
          end
        end
        S_WAIT: if (wr_cnt == pass_pairs) begin
          wr_cnt <= '0;
          state  <= S_FEED;
          if (!col) begin
            col <= 1'b1;
          end else begin
            col <= 1'b0;
            if (oct == OW'(OCTAVES - 1)) begin
              oct   <= '0;
              state <= S_UNLOAD;
            end else begin
              oct <= oct + 1'b1;
            end
          end
        end
        S_UNLOAD: begin
          out_valid <= 1'b1;
          if (ux == CW'(IMG_W - 1)) begin
            ux <= '0;
            if (uy == CW'(IMG_H - 1)) begin
              uy    <= '0;
              done  <= 1'b1;
              state <= S_LOAD;
            end else begin
              uy <= uy + 1'b1;
            end
          end else begin
            ux <= ux + 1'b1;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // The mirrored extension of four samples needs lines of at least 6 samples
  // (even length) at the last octave.
  initial begin
    assert ((IMG_W >> (OCTAVES - 1)) >= 6 && (IMG_H >> (OCTAVES - 1)) >= 6 &&
            (IMG_W % (1 << OCTAVES)) == 0 && (IMG_H % (1 << OCTAVES)) == 0)
      else $error("dwt_mem_ctrl: tile too small for %0d octaves", OCTAVES);
  end
endmodule
