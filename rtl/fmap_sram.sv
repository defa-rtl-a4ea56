// fmap_sram: the 16-bank on-chip buffer for the bounded ranges of the multi-scale fmap.
//
// Level l owns banks 4l..4l+3; pixel (x, y) of level l is stored in bank
// 4l + {y[0], x[0]} at address ((y mod BR_l)/2)*(BR_l/2) + (x mod BR_l)/2. Every 2x2
// Neighbor Window thus spreads over the level's four banks and the four sampling
// points of one cycle (one per level) read 16 different banks: no bank conflict.
// Because addressing is modulo the bounded range, the buffer is a circular window:
// after the reference point slides by one pixel only the entering column is written,
// the overlapping pixels stay in place and are reused.
// Bank depth is (BR_l/2)^2 words of LANES x DW bits, so each level has its own,
// narrower or wider, range. One write port (a whole pixel vector) and one read port
// per bank; reads are registered (data one clock after the address, like an SRAM
// macro). The 16-bank, 4-per-level arrangement follows the architecture; the range
// sizes and the circular addressing are this design's choices.
module fmap_sram
  import defa_pkg::*;
(
  input  logic                  clk,
  input  logic                  we,
  input  logic [$clog2(NL)-1:0] wlevel,
  input  coord_t                wx,
  input  coord_t                wy,
  input  pix_t                  wdata,
  input  logic                  re,
  input  baddr_t                raddr [BANKS],
  output pix_t                  rdata [BANKS]
);

  for (genvar l = 0; l < NL; l++) begin : g_lvl
    localparam int BR    = br_size(l);
    localparam int DEPTH = (BR / 2) * (BR / 2);
    for (genvar b = 0; b < 4; b++) begin : g_bank
      pix_t mem [DEPTH];
      logic wsel;
      baddr_t waddr;
      assign wsel  = we && (wlevel == l) && (bank_of(wx, wy) == 2'(b));
      assign waddr = addr_of(wx, wy, BR);
      always_ff @(posedge clk) begin
        if (wsel) mem[waddr[$clog2(DEPTH)-1:0]] <= wdata;
        if (re)   rdata[4*l+b] <= mem[raddr[4*l+b][$clog2(DEPTH)-1:0]];
      end
    end
  end

endmodule
