// pe_array: the reconfigurable PE array, LANES (16) pe_lane instances.
//
// BA mode: the 16 neighbour pixels read in one cycle (4 levels x N0..N3, each a
// LANES-channel vector) are split by channel: lane c gets channel c of every pixel,
// together with the shared t0/t1/prob of each level. ba_res[c] is lane c's acc[0].
// MM mode: one step multiplies a column of Q (q[r] for query row r = lane r) with one
// row of a 16x16 W tile broadcast to all lanes; after 16 steps mm_res[r][j] holds
// (Q x W)[r][j] (output-stationary). lane_en[r] low freezes lane r, which is how rows
// removed by a mask (pruned fmap pixels or points) cost no computation.
// One-cycle latency from inputs to accumulators. Channel-per-lane and row-per-lane
// mapping are this design's reading of the architecture figure.
module pe_array
  import defa_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  pe_mode_e   mode,
  input  logic       clr,
  input  logic       en,
  input  logic [LANES-1:0] lane_en,
  // BA mode
  input  pix_t       npix [NL][4],
  input  frac_t      t0   [NL],
  input  frac_t      t1   [NL],
  input  prob_t      prob [NL],
  // MM mode
  input  data_t      q    [LANES],
  input  data_t      w    [LANES],
  output acc_t       ba_res [LANES],
  output acc_t       mm_res [LANES][LANES]
);

  for (genvar c = 0; c < LANES; c++) begin : g_lane
    data_t n_c [NL][4];
    for (genvar l = 0; l < NL; l++) begin : g_l
      for (genvar k = 0; k < 4; k++) begin : g_k
        assign n_c[l][k] = npix[l][k][c];
      end
    end
    pe_lane u_lane (
      .clk  (clk),
      .rst_n(rst_n),
      .mode (mode),
      .clr  (clr),
      .en   (en & lane_en[c]),
      .n    (n_c),
      .t0   (t0),
      .t1   (t1),
      .prob (prob),
      .q    (q[c]),
      .w    (w),
      .acc  (mm_res[c])
    );
    assign ba_res[c] = mm_res[c][0];
  end

endmodule
