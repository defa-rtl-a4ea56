// fmap_mask_gen: frequency-weighted fmap pruning (FWP).
//
// Counting: while the PE array interpolates, each level reports the top-left
// neighbour (x0, y0) of the point it samples (cnt_en[l]); the four pixels
// (x0..x0+1, y0..y0+1) are read by the interpolation, so their sampled-frequency
// counters F go up by one. The counters are banked by pixel parity like the fmap
// SRAM, so the four increments of a level hit four different banks in the same clock.
// Counters saturate at 2^CW-1; sum[l] tracks the sum of F over level l.
// Scan (start pulse): every pixel is compared with the threshold
//     T = k * (1/HW) * sum_i F_i           (k = k_q / 2^KF)
// evaluated without division as keep = (2^KF * F * HW >= k_q * sum). Kept pixels get
// mask bit 1, pruned pixels 0. Four pixels per level and clock, all levels at once;
// the counters and sums are cleared as they are scanned, ready for the next block.
// done pulses when the scan ends; busy is high during it.
// Mask read port (combinational): the mask produced by the last scan, i.e. from the
// previous attention block, which the loader uses to skip pruned pixels. All bits are 1
// after reset. Threshold formula and counting rule follow the architecture; counter
// width, the no-division compare and the banking are this design's choices.
module fmap_mask_gen
  import defa_pkg::*;
#(
  parameter int CW = 4,     // sampled-frequency counter width
  parameter int KF = 4      // fraction bits of k
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // counting
  input  logic [NL-1:0]         cnt_en,
  input  coord_t                cnt_x [NL],
  input  coord_t                cnt_y [NL],
  // scan
  input  logic                  start,
  input  logic [7:0]            k_q,
  output logic                  busy,
  output logic                  done,
  output logic [15:0]           kept_pixels,   // pixels kept by the last scan
  // mask read
  input  logic [$clog2(NL)-1:0] mrd_level,
  input  coord_t                mrd_x,
  input  coord_t                mrd_y,
  output logic                  mrd_keep
);

  localparam int SUMW = 24;
  localparam int SCW  = 12;       // scan index width
  localparam int CMAX = 2**CW - 1;

  logic [SCW-1:0] scan_idx;
  logic [15:0]    kept_acc;
  logic           keep_bits [NL][4];
  logic           mrd_lvl_bit [NL];

  for (genvar l = 0; l < NL; l++) begin : g_lvl
    localparam int W     = fmap_w(l);
    localparam int H     = fmap_h(l);
    localparam int DEPTH = (W / 2) * (H / 2);
    localparam int AW    = $clog2(DEPTH);

    logic [SUMW-1:0] sum;
    logic [AW-1:0]   caddr [4];
    logic            cinc  [4];
    logic            scan_on;
    logic [AW-1:0]   saddr;
    logic [SUMW+16:0] rhs;

    assign scan_on = busy && (scan_idx < SCW'(DEPTH));
    assign saddr   = scan_idx[AW-1:0];
    assign rhs     = (SUMW+17)'(k_q) * (SUMW+17)'(sum);

    always_comb begin
      for (int b = 0; b < 4; b++) begin
        coord_t xb, yb;
        xb = (cnt_x[l][0] == b[0]) ? cnt_x[l] : cnt_x[l] + 1'b1;
        yb = (cnt_y[l][0] == b[1]) ? cnt_y[l] : cnt_y[l] + 1'b1;
        caddr[b] = AW'(int'(yb[XW-1:1]) * (W / 2) + int'(xb[XW-1:1]));
        cinc[b]  = 1'b0;
        if (cnt_en[l] && !busy) cinc[b] = 1'b1;
      end
    end

    for (genvar b = 0; b < 4; b++) begin : g_bank
      logic [CW-1:0] cnt  [DEPTH];
      logic          mask [DEPTH];
      logic          not_sat;
      logic [SUMW+16:0] lhs;
      assign not_sat = (cnt[caddr[b]] != CW'(CMAX));
      assign lhs     = (SUMW+17)'(cnt[saddr]) * (SUMW+17)'(W * H) * (SUMW+17)'(2**KF);
      assign keep_bits[l][b] = scan_on && (lhs >= rhs);

      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < DEPTH; i++) begin
            cnt[i]  <= '0;
            mask[i] <= 1'b1;
          end
        end else if (scan_on) begin
          mask[saddr] <= (lhs >= rhs);
          cnt[saddr]  <= '0;
        end else if (cinc[b] && not_sat) begin
          cnt[caddr[b]] <= cnt[caddr[b]] + 1'b1;
        end
      end
    end

    // actual (non-saturated) increments of this level in this clock
    logic [2:0] ninc;
    assign ninc = 3'(cinc[0] && g_bank[0].not_sat) + 3'(cinc[1] && g_bank[1].not_sat)
                + 3'(cinc[2] && g_bank[2].not_sat) + 3'(cinc[3] && g_bank[3].not_sat);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                                     sum <= '0;
      else if (busy && scan_idx == SCW'(DEPTH - 1))   sum <= '0;
      else if (!busy)                                 sum <= sum + SUMW'(ninc);
    end

    // mask read, this level
    always_comb begin
      logic [1:0] bsel;
      logic [AW-1:0] ra;
      bsel = bank_of(mrd_x, mrd_y);
      ra   = AW'(int'(mrd_y[XW-1:1]) * (W / 2) + int'(mrd_x[XW-1:1]));
      case (bsel)
        2'd0:    mrd_lvl_bit[l] = g_bank[0].mask[ra];
        2'd1:    mrd_lvl_bit[l] = g_bank[1].mask[ra];
        2'd2:    mrd_lvl_bit[l] = g_bank[2].mask[ra];
        default: mrd_lvl_bit[l] = g_bank[3].mask[ra];
      endcase
    end
  end

  assign mrd_keep = mrd_lvl_bit[mrd_level];

  localparam int SCAN_LEN = (fmap_w(0) / 2) * (fmap_h(0) / 2);   // level 0 is the largest

  logic [4:0] kept_now;
  always_comb begin
    kept_now = '0;
    for (int l = 0; l < NL; l++)
      for (int b = 0; b < 4; b++) kept_now += 5'(keep_bits[l][b]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      done        <= 1'b0;
      scan_idx    <= '0;
      kept_acc    <= '0;
      kept_pixels <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy     <= 1'b1;
          scan_idx <= '0;
          kept_acc <= '0;
        end
      end else begin
        kept_acc <= kept_acc + 16'(kept_now);
        if (scan_idx == SCW'(SCAN_LEN - 1)) begin
          busy        <= 1'b0;
          done        <= 1'b1;
          kept_pixels <= kept_acc + 16'(kept_now);
        end
        scan_idx <= scan_idx + 1'b1;
      end
    end
  end

endmodule
