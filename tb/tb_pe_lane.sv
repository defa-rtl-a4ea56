// tb_pe_lane: one lane. MM mode: 16 random steps must leave acc[j] = sum_k q_k*w_k[j]
// exactly, one clock after each step. BA mode: several steps of four levels must
// accumulate in acc[0] the probability-weighted bilinear samples (floating-point
// reference, 3 LSB of S per term allowed). Also checks clear and enable.
module tb_pe_lane;
  import defa_pkg::*;

  logic clk = 0, rst_n = 0;
  pe_mode_e mode;
  logic clr, en;
  data_t n [NL][4];
  frac_t t0 [NL], t1 [NL];
  prob_t prob [NL];
  data_t q;
  data_t w [LANES];
  acc_t  acc [LANES];
  int checks = 0, failures = 0;

  pe_lane dut (.clk, .rst_n, .mode, .clr, .en, .n, .t0, .t1, .prob, .q, .w, .acc);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint ref_mm [LANES];
  real ref_ba, tol;

  initial begin
    mode = MODE_MM; clr = 0; en = 0; q = '0;
    for (int j = 0; j < LANES; j++) w[j] = '0;
    for (int l = 0; l < NL; l++) begin
      t0[l] = '0; t1[l] = '0; prob[l] = '0;
      for (int k = 0; k < 4; k++) n[l][k] = '0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // ---- MM
    clr = 1; @(negedge clk); clr = 0;
    for (int j = 0; j < LANES; j++) ref_mm[j] = 0;
    for (int k = 0; k < 16; k++) begin
      en = 1;
      q = data_t'($urandom);
      for (int j = 0; j < LANES; j++) begin
        w[j] = data_t'($urandom);
        ref_mm[j] += longint'(q) * longint'(w[j]);
      end
      @(negedge clk);
    end
    en = 0;
    q = data_t'($urandom);   // no effect without en
    @(negedge clk);
    for (int j = 0; j < LANES; j++) begin
      checks++;
      if (longint'(acc[j]) != ref_mm[j]) begin
        failures++;
        $display("MM acc[%0d]=%0d ref=%0d", j, acc[j], ref_mm[j]);
      end
    end
    // ---- BA
    mode = MODE_BA;
    clr = 1; @(negedge clk); clr = 0;
    ref_ba = 0; tol = 0;
    for (int s = 0; s < 6; s++) begin
      en = 1;
      for (int l = 0; l < NL; l++) begin
        real fx, fy;
        for (int k = 0; k < 4; k++) n[l][k] = data_t'($urandom);
        t0[l] = frac_t'($urandom); t1[l] = frac_t'($urandom);
        prob[l] = prob_t'($urandom_range(0, 1024));
        fy = real'(t0[l]) / 256.0; fx = real'(t1[l]) / 256.0;
        ref_ba += real'(prob[l]) * (real'(n[l][0]) * (1 - fx) * (1 - fy) + real'(n[l][1]) * fx * (1 - fy)
                                  + real'(n[l][2]) * (1 - fx) * fy + real'(n[l][3]) * fx * fy);
        tol += 3.0 * real'(prob[l]) + 1.0;
      end
      @(negedge clk);
    end
    en = 0;
    @(negedge clk);
    checks++;
    if (real'(acc[0]) - ref_ba > tol || ref_ba - real'(acc[0]) > tol) begin
      failures++;
      $display("BA acc=%0d ref=%f tol=%f", acc[0], ref_ba, tol);
    end
    clr = 1; @(negedge clk); clr = 0;
    checks++;
    if (acc[0] != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
