// defa_top: deformable-attention accelerator core.
//
// One query = one reference point of one attention head and one LANES-channel slice
// of the value fmap. The query carries the NL*NP attention logits (Q x W^A), the
// NL*NP sampling offsets (Delta-P = Q x W^S, TF fraction bits) and the reference point
// on every level. The core then
//   1. normalises the logits (softmax_unit) and prunes near-zero probabilities
//      (point_mask_gen, PAP), packing the surviving points per level
//      (compression_unit);
//   2. brings each level's bounded range around the reference point into the
//      16-bank fmap_sram, reusing the overlap with the previous window and fetching
//      only pixels kept by the fmap mask of the previous block (decompression_unit);
//   3. runs the fused grid-sampling + aggregation in BA mode: every clock one kept
//      point of each of the four levels is placed (sample_addr_gen), its four
//      neighbours are read from 16 different banks, interpolated and weighted by its
//      probability in the pe_array; the four levels' results add into the lane
//      accumulators, so sampled values never leave the array;
//   4. counts the pixels every interpolation touches (fmap_mask_gen); fwp_start turns
//      the counts into the fmap mask for the next block (FWP).
// While no query is running the same pe_array works in MM mode on a 16-row Q block
// and a 16x16 W tile (mm_* ports), one row of W per mm_step, output-stationary;
// mm_lane_en drops rows removed by a mask.
// External memory is a pixel request/response port (mem_*). res_valid pulses with the
// head output slice in res_acc (Q0.12 scale) and res_pix (INT12, floor, saturated).
module defa_top
  import defa_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // configuration
  input  prob_t                 pap_thr,           // PAP probability threshold, Q0.12
  input  logic [7:0]            fwp_k,             // FWP k, 4 fraction bits
  // query
  input  logic                  q_valid,
  output logic                  q_ready,
  input  data_t                 q_logits [NPTS],   // index l*NP + p
  input  off_t                  q_off_x  [NPTS],
  input  off_t                  q_off_y  [NPTS],
  input  coord_t                q_ref_x  [NL],
  input  coord_t                q_ref_y  [NL],
  output logic                  res_valid,
  output acc_t                  res_acc  [LANES],
  output pix_t                  res_pix,
  output logic [NPTS-1:0]       res_point_mask,
  // MM mode
  input  logic                  mm_clr,
  input  logic                  mm_step,
  input  logic [LANES-1:0]      mm_lane_en,
  input  data_t                 mm_q [LANES],      // Q[r][k] for lane r
  input  data_t                 mm_w [LANES],      // W[k][0..15]
  output acc_t                  mm_res [LANES][LANES],
  // FWP
  input  logic                  fwp_start,
  output logic                  fwp_busy,
  output logic                  fwp_done,
  output logic [15:0]           fwp_kept_pixels,
  // external memory
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output logic [$clog2(NL)-1:0] mem_req_level,
  output coord_t                mem_req_x,
  output coord_t                mem_req_y,
  input  logic                  mem_rsp_valid,
  input  pix_t                  mem_rsp_data,
  // events (one clock pulses)
  output logic                  ev_reuse,
  output logic                  ev_slide,
  output logic                  ev_full,
  output logic                  ev_skip,
  output logic                  ev_issue
);

  localparam int LW = $clog2(NL);
  localparam int PIW = $clog2(NP);
  localparam int CNW = $clog2(NP+1);

  // ---------------- query registers
  data_t  logits_r [NPTS];
  off_t   offx_r [NPTS], offy_r [NPTS];
  coord_t refx_r [NL], refy_r [NL];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NPTS; i++) begin
        logits_r[i] <= '0; offx_r[i] <= '0; offy_r[i] <= '0;
      end
      for (int l = 0; l < NL; l++) begin
        refx_r[l] <= '0; refy_r[l] <= '0;
      end
    end else if (q_valid && q_ready) begin
      logits_r <= q_logits;
      offx_r   <= q_off_x;
      offy_r   <= q_off_y;
      refx_r   <= q_ref_x;
      refy_r   <= q_ref_y;
    end
  end

  // ---------------- softmax, PAP, compression
  logic  smx_start, smx_busy, smx_done, pap_valid, pap_vout;
  prob_t probs  [NPTS];
  prob_t pruned [NPTS];
  logic [NPTS-1:0] pmask;
  logic [$clog2(NPTS+1)-1:0] kept_cnt;
  logic [PIW-1:0] plist [NL][NP];
  logic [CNW-1:0] pcnt  [NL];
  logic [CNW-1:0] pmax;

  softmax_unit u_smx (
    .clk(clk), .rst_n(rst_n), .start(smx_start), .logits(logits_r),
    .busy(smx_busy), .done(smx_done), .probs(probs)
  );

  point_mask_gen u_pmg (
    .clk(clk), .rst_n(rst_n), .valid_in(pap_valid), .probs(probs), .thr(pap_thr),
    .valid_out(pap_vout), .mask(pmask), .pruned(pruned), .kept_cnt(kept_cnt)
  );

  compression_unit u_cmp (
    .mask(pmask), .list(plist), .cnt(pcnt), .max_cnt(pmax)
  );

  assign res_point_mask = pmask;

  // ---------------- controller
  logic            ld_valid, ld_ready;
  logic [LW-1:0]   ld_level;
  coord_t          ld_x, ld_y;
  logic            iss_valid;
  logic [PIW-1:0]  iss_j;
  logic [NL-1:0]   iss_lvl, pe_lvl_ba;
  logic            pe_en_ba, pe_clr, pe_en;
  pe_mode_e        pe_mode;

  defa_controller u_ctrl (
    .clk(clk), .rst_n(rst_n),
    .q_valid(q_valid), .q_ready(q_ready), .ref_x(q_ref_x), .ref_y(q_ref_y),
    .smx_start(smx_start), .smx_done(smx_done), .pap_valid(pap_valid),
    .cnt(pcnt), .max_cnt(pmax),
    .ld_valid(ld_valid), .ld_ready(ld_ready), .ld_level(ld_level), .ld_x(ld_x), .ld_y(ld_y),
    .iss_valid(iss_valid), .iss_j(iss_j), .iss_lvl(iss_lvl),
    .pe_en_ba(pe_en_ba), .pe_lvl_ba(pe_lvl_ba), .pe_mode(pe_mode), .pe_clr(pe_clr),
    .mm_clr(mm_clr), .mm_step(mm_step), .pe_en(pe_en),
    .res_valid(res_valid), .ev_reuse(ev_reuse), .ev_slide(ev_slide), .ev_full(ev_full)
  );

  // ---------------- fmap mask generator (FWP)
  logic [NL-1:0] fwp_cnt_en;
  coord_t        sx0 [NL], sy0 [NL];
  logic          mrd_keep;

  fmap_mask_gen u_fmg (
    .clk(clk), .rst_n(rst_n),
    .cnt_en(fwp_cnt_en), .cnt_x(sx0), .cnt_y(sy0),
    .start(fwp_start), .k_q(fwp_k), .busy(fwp_busy), .done(fwp_done),
    .kept_pixels(fwp_kept_pixels),
    .mrd_level(ld_level), .mrd_x(ld_x), .mrd_y(ld_y), .mrd_keep(mrd_keep)
  );

  // ---------------- decompression and fmap SRAM
  logic          s_we;
  logic [LW-1:0] s_wlevel;
  coord_t        s_wx, s_wy;
  pix_t          s_wdata;
  logic          wr_done;

  decompression_unit u_dec (
    .clk(clk), .rst_n(rst_n),
    .in_valid(ld_valid), .in_ready(ld_ready), .in_level(ld_level),
    .in_x(ld_x), .in_y(ld_y), .in_keep(mrd_keep),
    .mem_req_valid(mem_req_valid), .mem_req_ready(mem_req_ready),
    .mem_req_level(mem_req_level), .mem_req_x(mem_req_x), .mem_req_y(mem_req_y),
    .mem_rsp_valid(mem_rsp_valid), .mem_rsp_data(mem_rsp_data),
    .we(s_we), .wlevel(s_wlevel), .wx(s_wx), .wy(s_wy), .wdata(s_wdata),
    .wr_done(wr_done), .skipped(ev_skip)
  );

  baddr_t raddr [BANKS];
  pix_t   rdata [BANKS];

  fmap_sram u_sram (
    .clk(clk), .we(s_we), .wlevel(s_wlevel), .wx(s_wx), .wy(s_wy), .wdata(s_wdata),
    .re(iss_valid), .raddr(raddr), .rdata(rdata)
  );

  // ---------------- sampling address generation (one per level)
  frac_t t0_c [NL], t1_c [NL];
  prob_t prob_c [NL];

  for (genvar l = 0; l < NL; l++) begin : g_sag
    logic [PIW-1:0] p;
    baddr_t         ba [4];
    assign p = plist[l][iss_j];
    sample_addr_gen #(.LVL(l)) u_sag (
      .ref_x(refx_r[l]), .ref_y(refy_r[l]),
      .off_x(offx_r[l*NP + int'(p)]), .off_y(offy_r[l*NP + int'(p)]),
      .x0(sx0[l]), .y0(sy0[l]), .t0(t0_c[l]), .t1(t1_c[l]), .baddr(ba)
    );
    for (genvar b = 0; b < 4; b++) begin : g_ba
      assign raddr[4*l + b] = ba[b];
    end
    assign prob_c[l]     = iss_lvl[l] ? pruned[l*NP + int'(p)] : '0;
    assign fwp_cnt_en[l] = iss_lvl[l];
  end

  // align with the SRAM read latency
  frac_t t0_r [NL], t1_r [NL];
  prob_t prob_r [NL];
  logic  px_r [NL], py_r [NL];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < NL; l++) begin
        t0_r[l] <= '0; t1_r[l] <= '0; prob_r[l] <= '0; px_r[l] <= 1'b0; py_r[l] <= 1'b0;
      end
    end else begin
      for (int l = 0; l < NL; l++) begin
        t0_r[l]   <= t0_c[l];
        t1_r[l]   <= t1_c[l];
        prob_r[l] <= prob_c[l];
        px_r[l]   <= sx0[l][0];
        py_r[l]   <= sy0[l][0];
      end
    end
  end

  // bank -> neighbour crossbar: neighbour k = {dy, dx} of level l sits in bank
  // 4l + {py ^ dy, px ^ dx}
  pix_t  npix [NL][4];
  prob_t prob_pe [NL];
  always_comb begin
    for (int l = 0; l < NL; l++) begin
      for (int k = 0; k < 4; k++)
        npix[l][k] = rdata[4*l + int'({py_r[l] ^ k[1], px_r[l] ^ k[0]})];
      prob_pe[l] = pe_lvl_ba[l] ? prob_r[l] : '0;
    end
  end

  // ---------------- PE array
  acc_t ba_res [LANES];

  pe_array u_pe (
    .clk(clk), .rst_n(rst_n), .mode(pe_mode), .clr(pe_clr), .en(pe_en),
    .lane_en((pe_mode == MODE_MM) ? mm_lane_en : {LANES{1'b1}}),
    .npix(npix), .t0(t0_r), .t1(t1_r), .prob(prob_pe),
    .q(mm_q), .w(mm_w), .ba_res(ba_res), .mm_res(mm_res)
  );

  always_comb begin
    for (int c = 0; c < LANES; c++) begin
      acc_t s;
      s = ba_res[c] >>> PW;
      res_acc[c] = ba_res[c];
      if (s > acc_t'(2**(DW-1) - 1))   res_pix[c] = data_t'(2**(DW-1) - 1);
      else if (s < -acc_t'(2**(DW-1))) res_pix[c] = data_t'(-(2**(DW-1)));
      else                             res_pix[c] = data_t'(s);
    end
  end

  assign ev_issue = iss_valid;

endmodule
