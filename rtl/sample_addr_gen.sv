// sample_addr_gen: turns a reference point and a sampling offset of one level into
// the bilinear-interpolation operands and the fmap SRAM addresses.
//
// The offset (signed, TF fraction bits) is first clipped to the level's bounded
// range, [-BR/2, BR/2-1) pixels around the reference point, so that all four
// neighbours lie inside the window held on chip; the sampling position is then clamped
// to the fmap ([0, W-1) in x, [0, H-1) in y). The integer part gives the top-left
// neighbour (x0, y0), the fraction parts give t1 = x - x0 and t0 = y - y0. For each of
// the level's four banks b = {py, px} the unit outputs the word address of the one
// neighbour stored there (the neighbour whose x parity is px and y parity is py).
// Combinational. Computing t0/t1 outside the PE follows the architecture; clipping to
// the bounded range and clamping at the fmap edge (instead of zero padding) are this
// design's choices.
module sample_addr_gen
  import defa_pkg::*;
#(
  parameter int LVL = 0
) (
  input  coord_t ref_x,
  input  coord_t ref_y,
  input  off_t   off_x,
  input  off_t   off_y,
  output coord_t x0,
  output coord_t y0,
  output frac_t  t0,
  output frac_t  t1,
  output baddr_t baddr [4]     // indexed by bank {py, px}
);

  localparam int BR  = br_size(LVL);
  localparam int HB  = BR / 2;
  localparam int FW  = fmap_w(LVL);
  localparam int FH  = fmap_h(LVL);
  localparam int SXW = XW + TF + 2;

  localparam logic signed [OW-1:0]  OMIN = OW'(-(HB << TF));
  localparam logic signed [OW-1:0]  OMAX = OW'(((HB - 1) << TF) - 1);
  localparam logic signed [SXW-1:0] XMAX = SXW'(((FW - 1) << TF) - 1);
  localparam logic signed [SXW-1:0] YMAX = SXW'(((FH - 1) << TF) - 1);

  function automatic logic signed [SXW-1:0] place(input coord_t r, input off_t o,
                                                  input logic signed [SXW-1:0] lim);
    off_t oc;
    logic signed [SXW-1:0] s;
    oc = (o < OMIN) ? OMIN : (o > OMAX) ? OMAX : o;
    s  = $signed({2'b00, r, {TF{1'b0}}}) + SXW'(oc);
    if (s < 0)   s = '0;
    if (s > lim) s = lim;
    return s;
  endfunction

  logic signed [SXW-1:0] sx, sy;
  coord_t xb, yb;
  always_comb begin
    sx = place(ref_x, off_x, XMAX);
    sy = place(ref_y, off_y, YMAX);
    x0 = coord_t'(sx >>> TF);
    y0 = coord_t'(sy >>> TF);
    t1 = sx[TF-1:0];
    t0 = sy[TF-1:0];
    for (int b = 0; b < 4; b++) begin
      xb = (x0[0] == b[0]) ? x0 : x0 + 1'b1;
      yb = (y0[0] == b[1]) ? y0 : y0 + 1'b1;
      baddr[b] = addr_of(xb, yb, BR);
    end
  end

endmodule
