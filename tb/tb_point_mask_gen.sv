// tb_point_mask_gen: random probability vectors and thresholds (including the Fig-2
// style vector 0.8/0.13/0.07 with a threshold between 0.13 and 0.8). Checks, the clock
// after valid_in, that the mask holds exactly the probabilities >= threshold, that the
// pruned vector keeps those and zeroes the rest, and the kept count.
module tb_point_mask_gen;
  import defa_pkg::*;
  localparam int N = NPTS;

  logic clk = 0, rst_n = 0;
  logic valid_in, valid_out;
  prob_t probs [N], pruned [N], thr;
  logic [N-1:0] mask;
  logic [$clog2(N+1)-1:0] kept_cnt;
  int checks = 0, failures = 0;

  point_mask_gen dut (.clk, .rst_n, .valid_in, .probs, .thr, .valid_out, .mask, .pruned, .kept_cnt);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    valid_in = 0; thr = '0;
    for (int i = 0; i < N; i++) probs[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 200; t++) begin
      int cnt;
      if (t == 0) begin
        for (int i = 0; i < N; i++) probs[i] = '0;
        probs[0] = prob_t'(3277); probs[1] = prob_t'(532); probs[2] = prob_t'(287);
        thr = prob_t'(600);
      end else begin
        for (int i = 0; i < N; i++) probs[i] = prob_t'($urandom_range(0, 1200));
        thr = (t % 7 == 0) ? probs[3] : prob_t'($urandom_range(0, 600));
      end
      valid_in = 1;
      @(negedge clk);
      valid_in = 0;
      checks++;
      if (!valid_out) failures++;
      cnt = 0;
      for (int i = 0; i < N; i++) begin
        logic k;
        k = (probs[i] >= thr);
        cnt += int'(k);
        checks++;
        if (mask[i] != k || pruned[i] != (k ? probs[i] : prob_t'(0))) begin
          failures++;
          $display("t=%0d i=%0d p=%0d thr=%0d mask=%0d pruned=%0d", t, i, probs[i], thr, mask[i], pruned[i]);
        end
      end
      checks++;
      if (int'(kept_cnt) != cnt) failures++;
      if (t == 0) begin
        checks++;
        if (mask[2:0] != 3'b001) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
