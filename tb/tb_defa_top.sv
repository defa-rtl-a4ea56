// tb_defa_top: end-to-end test of the accelerator core at its default sizes.
//
// A behavioural external memory returns pixel vectors given by a fixed hash of
// (level, x, y, channel), with random request stalls and response latency. The test
// runs:
//   1. an MM-mode tile (16x16 Q block times 16x16 W tile, two rows masked off) and
//      checks it against the integer product;
//   2. block A: a row of queries whose reference point slides along x (so windows are
//      loaded whole, slid by one column, or reused), with random logits and offsets.
//      Each result is checked against a floating-point model of the whole operator:
//      softmax probabilities (taken from the unit, which has its own test), PAP with
//      the threshold, clipped/clamped sampling positions, bilinear interpolation of the
//      memory's pixels and the probability-weighted sum over the kept points. The
//      number of BA issue clocks must equal the largest per-level kept-point count;
//   3. an FWP scan, compared with a software count of the pixels block A sampled;
//   4. block B, the same row with new offsets: pixels pruned by block A's fmap mask
//      must read as zero (and are not fetched), which the model follows;
//   5. a second MM tile, after BA mode, to show the mode switch back.
// Every mechanism (window reuse, slide, full load, skipped fetch, pruned points,
// fewer issue clocks than points per level, FWP scan, masked MM lanes, MM<->BA switch)
// is counted and must occur at least once.
module tb_defa_top;
  import defa_pkg::*;

  logic clk = 0, rst_n = 0;
  prob_t pap_thr;
  logic [7:0] fwp_k;
  logic q_valid, q_ready;
  data_t q_logits [NPTS];
  off_t q_off_x [NPTS], q_off_y [NPTS];
  coord_t q_ref_x [NL], q_ref_y [NL];
  logic res_valid;
  acc_t res_acc [LANES];
  pix_t res_pix;
  logic [NPTS-1:0] res_point_mask;
  logic mm_clr, mm_step;
  logic [LANES-1:0] mm_lane_en;
  data_t mm_q [LANES], mm_w [LANES];
  acc_t mm_res [LANES][LANES];
  logic fwp_start, fwp_busy, fwp_done;
  logic [15:0] fwp_kept_pixels;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [$clog2(NL)-1:0] mem_req_level;
  coord_t mem_req_x, mem_req_y;
  pix_t mem_rsp_data;
  logic ev_reuse, ev_slide, ev_full, ev_skip, ev_issue;
  int checks = 0, failures = 0;

  defa_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic data_t pixval(int l, int x, int y, int c);
    return data_t'(((l * 7 + 3) * (x * 37 + 11) + (y * 53 + 5) * (c + 1) * 29) % 4096);
  endfunction

  // ---------------- behavioural external memory
  int nreq = 0, lat = 0;
  logic pend = 0;
  logic [$clog2(NL)-1:0] pl;
  coord_t px, py;
  always @(posedge clk) begin
    mem_rsp_valid <= 1'b0;
    if (pend) begin
      if (lat == 0) begin
        mem_rsp_valid <= 1'b1;
        for (int c = 0; c < LANES; c++) mem_rsp_data[c] <= pixval(int'(pl), int'(px), int'(py), c);
        pend <= 1'b0;
      end else lat <= lat - 1;
    end else if (mem_req_valid && mem_req_ready) begin
      pend <= 1'b1; lat <= $urandom_range(0, 3);
      pl <= mem_req_level; px <= mem_req_x; py <= mem_req_y;
      nreq++;
    end
  end
  always @(negedge clk) mem_req_ready = ($urandom_range(0, 3) != 0);

  // ---------------- event counters
  int n_reuse = 0, n_slide = 0, n_full = 0, n_skip = 0, n_issue = 0;
  always @(posedge clk) if (rst_n) begin
    n_reuse += int'(ev_reuse);
    n_slide += int'(ev_slide);
    n_full  += int'(ev_full);
    n_skip  += int'(ev_skip);
    n_issue += int'(ev_issue);
  end

  // ---------------- software model state
  logic fmask [NL][64][64];   // fmap mask in force (from the previous block)
  int   F     [NL][64][64];   // sampled frequency in this block
  int   n_pruned_pts = 0, n_short_issue = 0, n_mm_masked = 0, n_switch = 0, n_scan = 0;

  function automatic void place(int r, int o, int l, int w, output int i0, output int t);
    int hb, oc, s;
    hb = br_size(l) / 2;
    oc = o;
    if (oc < -(hb * 256)) oc = -(hb * 256);
    if (oc > (hb - 1) * 256 - 1) oc = (hb - 1) * 256 - 1;
    s = r * 256 + oc;
    if (s < 0) s = 0;
    if (s > (w - 1) * 256 - 1) s = (w - 1) * 256 - 1;
    i0 = s / 256;
    t  = s % 256;
  endfunction

  function automatic real fpix(int l, int x, int y, int c);
    return fmask[l][x][y] ? real'(pixval(l, x, y, c)) : 0.0;
  endfunction

  task automatic mm_tile(logic [LANES-1:0] en_mask);
    data_t Q [LANES][16], W [16][LANES];
    for (int r = 0; r < LANES; r++) for (int k = 0; k < 16; k++) Q[r][k] = data_t'($urandom);
    for (int k = 0; k < 16; k++) for (int j = 0; j < LANES; j++) W[k][j] = data_t'($urandom);
    mm_lane_en = en_mask;
    mm_clr = 1; @(negedge clk); mm_clr = 0;
    for (int k = 0; k < 16; k++) begin
      mm_step = 1;
      for (int r = 0; r < LANES; r++) mm_q[r] = Q[r][k];
      for (int j = 0; j < LANES; j++) mm_w[j] = W[k][j];
      @(negedge clk);
    end
    mm_step = 0;
    @(negedge clk);
    for (int r = 0; r < LANES; r++) for (int j = 0; j < LANES; j++) begin
      longint s;
      s = 0;
      if (en_mask[r]) for (int k = 0; k < 16; k++) s += longint'(Q[r][k]) * longint'(W[k][j]);
      checks++;
      if (longint'(mm_res[r][j]) != s) begin
        failures++;
        if (failures < 10) $display("MM [%0d][%0d] = %0d expected %0d", r, j, mm_res[r][j], s);
      end
    end
    for (int r = 0; r < LANES; r++) if (!en_mask[r]) n_mm_masked++;
  endtask

  task automatic query(int bx, int by);
    int issue0, kept_l [NL], mx;
    prob_t p [NPTS];
    for (int l = 0; l < NL; l++) begin
      q_ref_x[l] = coord_t'(bx >> l);
      q_ref_y[l] = coord_t'(by >> l);
    end
    for (int i = 0; i < NPTS; i++) begin
      q_logits[i] = data_t'($urandom_range(0, 640)) - data_t'(320);   // +-5 with 6 fraction bits
      q_off_x[i]  = off_t'($urandom_range(0, 4800)) - off_t'(2400);
      q_off_y[i]  = off_t'($urandom_range(0, 4800)) - off_t'(2400);
    end
    issue0 = n_issue;
    while (!q_ready) @(negedge clk);
    q_valid = 1;
    @(negedge clk);
    q_valid = 0;
    while (!res_valid) @(negedge clk);
    p = dut.u_smx.probs;
    mx = 0;
    for (int l = 0; l < NL; l++) begin
      kept_l[l] = 0;
      for (int k = 0; k < NP; k++) if (p[l*NP + k] >= pap_thr) kept_l[l]++;
      if (kept_l[l] > mx) mx = kept_l[l];
    end
    for (int i = 0; i < NPTS; i++) begin
      checks++;
      if (res_point_mask[i] != (p[i] >= pap_thr)) failures++;
      if (!(p[i] >= pap_thr)) n_pruned_pts++;
    end
    for (int c = 0; c < LANES; c++) begin
      real ref_v, tol;
      ref_v = 0; tol = 0;
      for (int l = 0; l < NL; l++) for (int k = 0; k < NP; k++) begin
        int i, x0, y0, tx, ty;
        real fx, fy, s;
        i = l * NP + k;
        if (p[i] < pap_thr) continue;
        place(bx >> l, int'(q_off_x[i]), l, fmap_w(l), x0, tx);
        place(by >> l, int'(q_off_y[i]), l, fmap_h(l), y0, ty);
        fx = real'(tx) / 256.0; fy = real'(ty) / 256.0;
        s = fpix(l, x0, y0, c) * (1 - fx) * (1 - fy) + fpix(l, x0 + 1, y0, c) * fx * (1 - fy)
          + fpix(l, x0, y0 + 1, c) * (1 - fx) * fy + fpix(l, x0 + 1, y0 + 1, c) * fx * fy;
        ref_v += real'(p[i]) * s;
        tol += 3.0 * real'(p[i]) + 1.0;
        if (c == 0) begin
          if (F[l][x0][y0] < 15)         F[l][x0][y0]++;
          if (F[l][x0 + 1][y0] < 15)     F[l][x0 + 1][y0]++;
          if (F[l][x0][y0 + 1] < 15)     F[l][x0][y0 + 1]++;
          if (F[l][x0 + 1][y0 + 1] < 15) F[l][x0 + 1][y0 + 1]++;
        end
      end
      checks++;
      if (real'(res_acc[c]) - ref_v > tol || ref_v - real'(res_acc[c]) > tol) begin
        failures++;
        if (failures < 20) $display("query (%0d,%0d) channel %0d: %0d expected %f (tol %f)", bx, by, c, res_acc[c], ref_v, tol);
      end
    end
    @(negedge clk);
    checks++;
    if (n_issue - issue0 != mx) begin
      failures++;
      $display("query (%0d,%0d): %0d issue clocks, expected %0d", bx, by, n_issue - issue0, mx);
    end
    if (mx < NP) n_short_issue++;
  endtask

  task automatic fwp_scan();
    int kept;
    longint sum;
    fwp_start = 1; @(negedge clk); fwp_start = 0;
    while (!fwp_done) @(negedge clk);
    n_scan++;
    kept = 0;
    for (int l = 0; l < NL; l++) begin
      sum = 0;
      for (int x = 0; x < fmap_w(l); x++) for (int y = 0; y < fmap_h(l); y++) sum += F[l][x][y];
      for (int x = 0; x < fmap_w(l); x++) for (int y = 0; y < fmap_h(l); y++) begin
        fmask[l][x][y] = (longint'(16) * F[l][x][y] * fmap_w(l) * fmap_h(l) >= longint'(fwp_k) * sum);
        kept += int'(fmask[l][x][y]);
        F[l][x][y] = 0;
      end
    end
    checks++;
    if (int'(fwp_kept_pixels) != kept) begin
      failures++;
      $display("FWP kept %0d pixels, expected %0d", fwp_kept_pixels, kept);
    end
  endtask

  initial begin
    pap_thr = prob_t'(100); fwp_k = 8'd16;
    q_valid = 0; mm_clr = 0; mm_step = 0; mm_lane_en = '1; fwp_start = 0;
    for (int i = 0; i < NPTS; i++) begin q_logits[i] = '0; q_off_x[i] = '0; q_off_y[i] = '0; end
    for (int l = 0; l < NL; l++) begin q_ref_x[l] = '0; q_ref_y[l] = '0; end
    for (int r = 0; r < LANES; r++) begin mm_q[r] = '0; mm_w[r] = '0; end
    for (int l = 0; l < NL; l++) for (int x = 0; x < 64; x++) for (int y = 0; y < 64; y++) begin
      fmask[l][x][y] = 1'b1; F[l][x][y] = 0;
    end
    mem_rsp_valid = 0; mem_rsp_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    mm_tile(16'hFFFF & ~16'h0210);
    n_switch++;
    // block A
    for (int x = 8; x < 20; x++) query(x, 20);
    query(19, 20);
    query(30, 33);
    fwp_scan();
    // block B
    for (int x = 8; x < 20; x++) query(x, 20);
    n_switch++;
    mm_tile(16'hFFFF);

    $display("events: full %0d slide %0d reuse %0d skip %0d fetch %0d pruned points %0d short issue %0d scans %0d masked MM rows %0d switches %0d",
             n_full, n_slide, n_reuse, n_skip, nreq, n_pruned_pts, n_short_issue, n_scan, n_mm_masked, n_switch);
    checks++;
    if (n_full == 0 || n_slide == 0 || n_reuse == 0 || n_skip == 0 || n_pruned_pts == 0 ||
        n_short_issue == 0 || n_scan == 0 || n_mm_masked == 0 || n_switch < 2) begin
      failures++;
      $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
