// tb_pe_array: the 16-lane array. MM mode: a random 16x16 Q block times a 16x16 W
// tile in 16 steps (one W row per step) must equal the integer matrix product; lanes
// whose lane_en is low must stay zero. BA mode: one step with 16 random neighbour
// pixels must give, in every lane c, the sum over levels of prob * bilinear sample of
// channel c (floating-point reference, 3 LSB of S per level allowed).
module tb_pe_array;
  import defa_pkg::*;

  logic clk = 0, rst_n = 0;
  pe_mode_e mode;
  logic clr, en;
  logic [LANES-1:0] lane_en;
  pix_t  npix [NL][4];
  frac_t t0 [NL], t1 [NL];
  prob_t prob [NL];
  data_t q [LANES], w [LANES];
  acc_t  ba_res [LANES];
  acc_t  mm_res [LANES][LANES];
  int checks = 0, failures = 0;

  pe_array dut (.clk, .rst_n, .mode, .clr, .en, .lane_en, .npix, .t0, .t1, .prob, .q, .w, .ba_res, .mm_res);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t Q [LANES][16], W [16][LANES];

  initial begin
    mode = MODE_MM; clr = 0; en = 0; lane_en = '1;
    for (int r = 0; r < LANES; r++) begin q[r] = '0; w[r] = '0; end
    for (int l = 0; l < NL; l++) begin
      t0[l] = '0; t1[l] = '0; prob[l] = '0;
      for (int k = 0; k < 4; k++) npix[l][k] = '0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < LANES; r++) for (int k = 0; k < 16; k++) Q[r][k] = data_t'($urandom);
    for (int k = 0; k < 16; k++) for (int j = 0; j < LANES; j++) W[k][j] = data_t'($urandom);
    lane_en = 16'hFFFF & ~16'h0104;   // rows 2 and 8 masked
    clr = 1; @(negedge clk); clr = 0;
    for (int k = 0; k < 16; k++) begin
      en = 1;
      for (int r = 0; r < LANES; r++) q[r] = Q[r][k];
      for (int j = 0; j < LANES; j++) w[j] = W[k][j];
      @(negedge clk);
    end
    en = 0;
    @(negedge clk);
    for (int r = 0; r < LANES; r++) for (int j = 0; j < LANES; j++) begin
      longint s;
      s = 0;
      if (lane_en[r]) for (int k = 0; k < 16; k++) s += longint'(Q[r][k]) * longint'(W[k][j]);
      checks++;
      if (longint'(mm_res[r][j]) != s) begin
        failures++;
        if (failures < 10) $display("MM [%0d][%0d]=%0d ref=%0d", r, j, mm_res[r][j], s);
      end
    end
    // ---- BA, one step
    mode = MODE_BA; lane_en = '1;
    clr = 1; @(negedge clk); clr = 0;
    for (int l = 0; l < NL; l++) begin
      t0[l] = frac_t'($urandom); t1[l] = frac_t'($urandom); prob[l] = prob_t'($urandom_range(0, 1500));
      for (int k = 0; k < 4; k++) for (int c = 0; c < LANES; c++) npix[l][k][c] = data_t'($urandom);
    end
    en = 1;
    @(negedge clk);
    en = 0;
    for (int c = 0; c < LANES; c++) begin
      real ref_v, tol;
      ref_v = 0; tol = 0;
      for (int l = 0; l < NL; l++) begin
        real fx, fy;
        fy = real'(t0[l]) / 256.0; fx = real'(t1[l]) / 256.0;
        ref_v += real'(prob[l]) * (real'(npix[l][0][c]) * (1 - fx) * (1 - fy) + real'(npix[l][1][c]) * fx * (1 - fy)
                                 + real'(npix[l][2][c]) * (1 - fx) * fy + real'(npix[l][3][c]) * fx * fy);
        tol += 3.0 * real'(prob[l]) + 1.0;
      end
      checks++;
      if (real'(ba_res[c]) - ref_v > tol || ref_v - real'(ba_res[c]) > tol) begin
        failures++;
        $display("BA lane %0d = %0d ref %f", c, ba_res[c], ref_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
