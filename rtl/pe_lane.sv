// pe_lane: one lane of the reconfigurable PE array - four recfg_pe units and sixteen
// output-stationary accumulators.
//
// BA mode: PE l interpolates level l's sampling point for this lane's channel and
// weights it by the point's probability; the four weighted samples (one per level,
// processed in parallel) are summed and added to acc[0] when en is high. Over the
// kept points of a query acc[0] becomes this channel of the head output (Q0.12 scale).
// MM mode: PE g multiplies the lane's Q element q by W row entries w[4g..4g+3]; acc[j]
// accumulates q*w[j], so after K steps acc[j] = sum_k Q[k]*W[k][j].
// clr zeroes the accumulators (it has priority over en). Results appear in acc one
// clock after the inputs. Lane structure follows the architecture; using acc[0] for
// the BA result is this design's choice.
module pe_lane
  import defa_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  pe_mode_e mode,
  input  logic     clr,
  input  logic     en,
  // BA mode: per level, the four neighbours (this lane's channel), t0, t1, prob
  input  data_t    n   [NL][4],
  input  frac_t    t0  [NL],
  input  frac_t    t1  [NL],
  input  prob_t    prob[NL],
  // MM mode
  input  data_t    q,
  input  data_t    w   [LANES],
  output acc_t     acc [LANES]
);

  acc_t  ba_out [NL];
  data_t s_unused [NL];
  acc_t  mm_out [NL][4];
  data_t w_grp  [NL][4];

  for (genvar g = 0; g < NL; g++) begin : g_pe
    for (genvar i = 0; i < 4; i++) begin : g_w
      assign w_grp[g][i] = w[4*g+i];
    end
    recfg_pe u_pe (
      .mode  (mode),
      .n     (n[g]),
      .t0    (t0[g]),
      .t1    (t1[g]),
      .prob  (prob[g]),
      .q     (q),
      .w     (w_grp[g]),
      .ba_out(ba_out[g]),
      .s_out (s_unused[g]),
      .mm_out(mm_out[g])
    );
  end

  acc_t ba_sum;
  always_comb begin
    ba_sum = '0;
    for (int g = 0; g < NL; g++) ba_sum += ba_out[g];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < LANES; j++) acc[j] <= '0;
    end else if (clr) begin
      for (int j = 0; j < LANES; j++) acc[j] <= '0;
    end else if (en) begin
      if (mode == MODE_BA) acc[0] <= acc[0] + ba_sum;
      else for (int j = 0; j < LANES; j++) acc[j] <= acc[j] + mm_out[j/4][j%4];
    end
  end

endmodule
