// tb_defa_controller: drives the controller with stub handshakes (softmax done after
// 10 clocks, a loader that is ready two clocks in three) and checks four queries:
// a sequence of queries whose reference points stay, move by +1 in x or jump. Per
// level the expected load is: the whole window (clipped at the fmap edges) after a
// jump, only the entering column after a +1 step in x, nothing if the point stayed. For each it counts the pixels offered per
// level and the BA issue clocks, which must equal max_cnt with iss_lvl[l] high for the
// first cnt[l] of them, PE enables one clock later, and one res_valid. While idle,
// mm_step must enable the PE array in MM mode.
module tb_defa_controller;
  import defa_pkg::*;

  logic clk = 0, rst_n = 0;
  logic q_valid, q_ready;
  coord_t ref_x [NL], ref_y [NL];
  logic smx_start, smx_done, pap_valid;
  logic [$clog2(NP+1)-1:0] cnt [NL];
  logic [$clog2(NP+1)-1:0] max_cnt;
  logic ld_valid, ld_ready;
  logic [$clog2(NL)-1:0] ld_level;
  coord_t ld_x, ld_y;
  logic iss_valid;
  logic [$clog2(NP)-1:0] iss_j;
  logic [NL-1:0] iss_lvl, pe_lvl_ba;
  logic pe_en_ba, pe_clr, pe_en;
  pe_mode_e pe_mode;
  logic mm_clr, mm_step;
  logic res_valid, ev_reuse, ev_slide, ev_full;
  int checks = 0, failures = 0;

  defa_controller dut (.clk, .rst_n, .q_valid, .q_ready, .ref_x, .ref_y, .smx_start, .smx_done,
    .pap_valid, .cnt, .max_cnt, .ld_valid, .ld_ready, .ld_level, .ld_x, .ld_y, .iss_valid, .iss_j,
    .iss_lvl, .pe_en_ba, .pe_lvl_ba, .pe_mode, .pe_clr, .mm_clr, .mm_step, .pe_en, .res_valid,
    .ev_reuse, .ev_slide, .ev_full);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // softmax stub
  int smx_cnt = -1;
  always @(posedge clk) begin
    smx_done <= 1'b0;
    if (smx_start) smx_cnt <= 10;
    else if (smx_cnt > 0) smx_cnt <= smx_cnt - 1;
    else if (smx_cnt == 0) begin smx_done <= 1'b1; smx_cnt <= -1; end
  end
  int phase = 0;
  always @(negedge clk) ld_ready = (phase++ % 3) != 0;

  // monitors
  int nld [NL], niss, nres, nen, lvl_err, nreuse, nslide, nfull;
  int iss_seen;
  always @(posedge clk) if (rst_n) begin
    if (ld_valid && ld_ready) begin
      nld[ld_level]++;
      if (int'(ld_x) >= fmap_w(int'(ld_level)) || int'(ld_y) >= fmap_h(int'(ld_level))) lvl_err++;
    end
    if (iss_valid) begin
      for (int l = 0; l < NL; l++) if (iss_lvl[l] != (int'(iss_j) < int'(cnt[l]))) lvl_err++;
      if (int'(iss_j) != niss) lvl_err++;
      niss++;
    end
    if (pe_en_ba) nen++;
    if (res_valid) nres++;
    if (ev_reuse) nreuse++;
    if (ev_slide) nslide++;
    if (ev_full) nfull++;
  end

  function automatic int span(int c, int hb, int w);
    int lo, hi;
    lo = (c - hb < 0) ? 0 : c - hb;
    hi = (c + hb - 1 > w - 1) ? w - 1 : c + hb - 1;
    return hi - lo + 1;
  endfunction

  // the previous reference point of every level, as the controller should remember it
  int pvx [NL], pvy [NL];
  logic pvv [NL];
  int tot_full = 0, tot_slide = 0, tot_reuse = 0;

  task automatic run_query(int bx, int by);
    int mx, efull, eslide, ereuse;
    for (int l = 0; l < NL; l++) begin
      ref_x[l] = coord_t'(bx >> l); ref_y[l] = coord_t'(by >> l);
      nld[l] = 0;
      cnt[l] = 3'($urandom_range(0, NP));
    end
    mx = 0;
    for (int l = 0; l < NL; l++) if (int'(cnt[l]) > mx) mx = int'(cnt[l]);
    max_cnt = 3'(mx);
    niss = 0; nres = 0; nen = 0; nreuse = 0; nslide = 0; nfull = 0;
    while (!q_ready) @(negedge clk);
    q_valid = 1;
    @(negedge clk);
    q_valid = 0;
    while (nres == 0) @(negedge clk);
    @(negedge clk);
    efull = 0; eslide = 0; ereuse = 0;
    for (int l = 0; l < NL; l++) begin
      int hb, e, x, y;
      hb = br_size(l) / 2;
      x = bx >> l; y = by >> l;
      if (pvv[l] && pvx[l] == x && pvy[l] == y) begin
        e = 0; ereuse++;
      end else if (pvv[l] && pvy[l] == y && x == pvx[l] + 1) begin
        e = (x + hb - 1 < fmap_w(l)) ? span(y, hb, fmap_h(l)) : 0; eslide++;
      end else begin
        e = span(x, hb, fmap_w(l)) * span(y, hb, fmap_h(l)); efull++;
      end
      pvv[l] = 1'b1; pvx[l] = x; pvy[l] = y;
      checks++;
      if (nld[l] != e) begin
        failures++;
        $display("query (%0d,%0d) level %0d loaded %0d pixels, expected %0d", bx, by, l, nld[l], e);
      end
    end
    checks++;
    if (niss != mx || nen != mx || nres != 1) begin
      failures++;
      $display("issue %0d enables %0d results %0d, max_cnt %0d", niss, nen, nres, mx);
    end
    checks++;
    if (nfull != efull || nslide != eslide || nreuse != ereuse) begin
      failures++;
      $display("events full %0d slide %0d reuse %0d, expected %0d %0d %0d", nfull, nslide, nreuse, efull, eslide, ereuse);
    end
    tot_full += efull; tot_slide += eslide; tot_reuse += ereuse;
  endtask

  initial begin
    q_valid = 0; mm_clr = 0; mm_step = 0; lvl_err = 0;
    for (int l = 0; l < NL; l++) begin ref_x[l] = '0; ref_y[l] = '0; cnt[l] = '0; end
    max_cnt = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // MM mode while idle
    mm_step = 1;
    #1;
    checks++;
    if (!pe_en || pe_mode != MODE_MM) failures++;
    @(negedge clk);
    mm_step = 0;
    for (int l = 0; l < NL; l++) pvv[l] = 1'b0;
    run_query(20, 20);
    run_query(21, 20);
    run_query(21, 20);
    run_query(21, 23);
    run_query(60, 60);
    run_query(61, 60);
    for (int x = 0; x < 12; x++) run_query(x, 5);
    checks++;
    if (tot_full == 0 || tot_slide == 0 || tot_reuse == 0) begin
      failures++;
      $display("not every load case happened: full %0d slide %0d reuse %0d", tot_full, tot_slide, tot_reuse);
    end
    checks++;
    if (lvl_err != 0) begin
      failures++;
      $display("%0d issue/level errors", lvl_err);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
