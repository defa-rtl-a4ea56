// tb_softmax_unit: random logit vectors (and a vector with one dominant logit, and an
// all-equal one) are normalised by the unit and compared with exp()/sum computed in
// floating point; each probability may differ by 3% of full scale plus 4 LSB (the
// unit approximates exp with a 32-entry power-of-two table). Also checks the latency
// from start to done (N+3 clocks) and that the probabilities sum to about 1.
module tb_softmax_unit;
  import defa_pkg::*;
  localparam int N = NPTS;

  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  data_t logits [N];
  prob_t probs [N];
  int checks = 0, failures = 0;

  softmax_unit dut (.clk, .rst_n, .start, .logits, .busy, .done, .probs);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_one(input int kind);
    real e [N];
    real s, pr;
    int cyc, psum;
    for (int i = 0; i < N; i++) begin
      case (kind)
        0: logits[i] = data_t'($urandom_range(0, 511)) - data_t'(256);     // +-4
        1: logits[i] = (i == 5) ? data_t'(400) : data_t'($urandom_range(0, 100));
        default: logits[i] = data_t'(77);
      endcase
    end
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
      if (cyc > 100) break;
    end
    checks++;
    if (cyc != N + 3) begin
      failures++;
      $display("latency %0d expected %0d", cyc, N + 3);
    end
    s = 0;
    for (int i = 0; i < N; i++) begin
      e[i] = $exp(real'(logits[i]) / real'(2**LF));
      s += e[i];
    end
    psum = 0;
    for (int i = 0; i < N; i++) begin
      pr = 4096.0 * e[i] / s;
      psum += int'(probs[i]);
      checks++;
      if (real'(probs[i]) - pr > 127.0 || pr - real'(probs[i]) > 127.0) begin
        failures++;
        $display("kind %0d p[%0d]=%0d ref=%f", kind, i, probs[i], pr);
      end
    end
    checks++;
    if (psum < 4096 - 40 || psum > 4096 + 40) begin
      failures++;
      $display("sum of probabilities %0d", psum);
    end
  endtask

  initial begin
    start = 0;
    for (int i = 0; i < N; i++) logits[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 30; t++) run_one(0);
    run_one(1);
    run_one(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
