// defa_pkg: types, sizes and address mapping shared by the deformable-attention
// accelerator. Data are INT12 (the precision the design is quantised to). The lane
// count (16), the level count (4) and the 16 SRAM banks follow the architecture; the
// number of points per level (4), the fraction widths and the bounded-range sizes are
// this design's own choices.
//
// Fmap SRAM mapping: level l owns banks 4l..4l+3. A pixel (x, y) lives in bank
// 4l + {y[0], x[0]}, so the four neighbours of any bilinear sample - which always
// differ in x or y parity - fall into four different banks (no bank conflict). Inside
// a bank the address is ((y mod BR)/2)*(BR/2) + (x mod BR)/2: the bounded range is a
// circular window, so when the reference point slides by one pixel only the new
// column has to be written and the rest of the window is reused.
package defa_pkg;

  parameter int DW    = 12;        // data width (INT12)
  parameter int LANES = 16;        // PE lanes = channels per pixel word
  parameter int NL    = 4;         // fmap levels
  parameter int NP    = 4;         // sampling points per level and head
  parameter int NPTS  = NL * NP;   // points per head and query
  parameter int TF    = 8;         // fraction bits of offsets, t0 and t1
  parameter int PW    = 12;        // probability width, unsigned Q0.12
  parameter int LF    = 6;         // fraction bits of softmax logits
  parameter int ACCW  = 32;        // accumulator width
  parameter int XW    = 8;         // pixel coordinate width
  parameter int OW    = 16;        // signed offset width (TF fraction bits)
  parameter int BANKS = 4 * NL;    // 16 SRAM banks
  parameter int BRMAX = 16;        // largest bounded range
  parameter int BAW   = 6;         // bank address width, (BRMAX/2)^2 = 64 words

  typedef logic signed [DW-1:0]   data_t;
  typedef logic [PW-1:0]          prob_t;
  typedef logic [TF-1:0]          frac_t;
  typedef logic signed [ACCW-1:0] acc_t;
  typedef logic [XW-1:0]          coord_t;
  typedef logic signed [OW-1:0]   off_t;
  typedef logic [BAW-1:0]         baddr_t;
  typedef data_t [LANES-1:0]      pix_t;    // one pixel vector, one channel per lane

  typedef enum logic {MODE_MM = 1'b0, MODE_BA = 1'b1} pe_mode_e;

  // Bounded range (square side, power of two) of each level.
  function automatic int br_size(input int l);
    case (l)
      0:       return 8;
      default: return 16;
    endcase
  endfunction

  // Fmap width and height of each level (pixels).
  function automatic int fmap_w(input int l);
    return 64 >> l;
  endfunction
  function automatic int fmap_h(input int l);
    return 64 >> l;
  endfunction

  // Bank inside a level holding pixel (x, y): N0..N3 of a Neighbor Window.
  function automatic logic [1:0] bank_of(input coord_t x, input coord_t y);
    return {y[0], x[0]};
  endfunction

  // Word address of pixel (x, y) in its bank for a level with bounded range br.
  function automatic baddr_t addr_of(input coord_t x, input coord_t y, input int br);
    int xm, ym;
    xm = int'(x) % br;
    ym = int'(y) % br;
    return baddr_t'((ym / 2) * (br / 2) + (xm / 2));
  endfunction

endpackage
