// tb_fmap_mask_gen: frequency-weighted pruning against a software model.
// Block 1: level 0 gets a single sampling point (the four pixels it touches get F = 1,
// like the 3x3 example with k = 1), the other levels get random points; with k = 1.5
// the scan must keep exactly the pixels with 16*F*HW >= k_q*sum(F) (read back through
// the mask port) and report their number. Block 2: random points and k = 1 again,
// checking that the counters were cleared by the first scan. The scan must take
// (W0/2)*(H0/2) clocks.
module tb_fmap_mask_gen;
  import defa_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [NL-1:0] cnt_en;
  coord_t cnt_x [NL], cnt_y [NL];
  logic start, busy, done;
  logic [7:0] k_q;
  logic [15:0] kept_pixels;
  logic [$clog2(NL)-1:0] mrd_level;
  coord_t mrd_x, mrd_y;
  logic mrd_keep;
  int checks = 0, failures = 0;

  fmap_mask_gen dut (.clk, .rst_n, .cnt_en, .cnt_x, .cnt_y, .start, .k_q, .busy, .done,
                     .kept_pixels, .mrd_level, .mrd_x, .mrd_y, .mrd_keep);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int F [NL][64*64];
  longint S [NL];

  task automatic clear_model();
    for (int l = 0; l < NL; l++) begin
      S[l] = 0;
      for (int i = 0; i < 64*64; i++) F[l][i] = 0;
    end
  endtask

  task automatic events(int n, logic only_one_l0);
    for (int t = 0; t < n; t++) begin
      for (int l = 0; l < NL; l++) begin
        int x, y;
        cnt_en[l] = (only_one_l0 && l == 0) ? (t == 0) : 1'($urandom);
        // concentrate samples in a corner so that counts differ
        x = $urandom_range(0, fmap_w(l) / 4);
        y = $urandom_range(0, fmap_h(l) / 4);
        cnt_x[l] = coord_t'(x); cnt_y[l] = coord_t'(y);
        if (cnt_en[l]) for (int k = 0; k < 4; k++) begin
          int idx;
          idx = (y + k / 2) * fmap_w(l) + x + k % 2;
          if (F[l][idx] < 15) begin F[l][idx]++; S[l]++; end
        end
      end
      @(negedge clk);
    end
    cnt_en = '0;
  endtask

  task automatic scan_and_check(int kq);
    int cyc, kept;
    k_q = 8'(kq);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; if (cyc > 5000) break; end
    checks++;
    if (cyc != (fmap_w(0) / 2) * (fmap_h(0) / 2)) begin
      failures++;
      $display("scan took %0d clocks", cyc);
    end
    kept = 0;
    for (int l = 0; l < NL; l++)
      for (int y = 0; y < fmap_h(l); y++)
        for (int x = 0; x < fmap_w(l); x++) begin
          logic k;
          k = (longint'(16) * F[l][y * fmap_w(l) + x] * fmap_w(l) * fmap_h(l) >= longint'(kq) * S[l]);
          kept += int'(k);
          mrd_level = 2'(l); mrd_x = coord_t'(x); mrd_y = coord_t'(y);
          #1;
          checks++;
          if (mrd_keep != k) begin
            failures++;
            if (failures < 10) $display("level %0d pixel (%0d,%0d) F=%0d sum=%0d keep=%0d expected %0d",
                                        l, x, y, F[l][y * fmap_w(l) + x], S[l], mrd_keep, k);
          end
        end
    checks++;
    if (int'(kept_pixels) != kept) begin
      failures++;
      $display("kept_pixels %0d expected %0d", kept_pixels, kept);
    end
  endtask

  initial begin
    cnt_en = '0; start = 0; k_q = 8'd16; mrd_level = '0; mrd_x = '0; mrd_y = '0;
    for (int l = 0; l < NL; l++) begin cnt_x[l] = '0; cnt_y[l] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // after reset every pixel is kept
    checks++;
    if (!mrd_keep) failures++;
    clear_model();
    events(300, 1'b1);
    scan_and_check(24);
    clear_model();
    events(500, 1'b0);
    scan_and_check(16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
