// tb_decompression_unit: a stream of pixel requests, a random third of them pruned by
// the fmap mask, against a behavioural external memory with random request stall and
// response latency. Pruned pixels must be written as zero in the clock they are
// offered, with no external request and a skipped pulse; kept pixels must cause exactly
// one external request for the same coordinates and be written with the returned data.
module tb_decompression_unit;
  import defa_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, in_keep;
  logic [$clog2(NL)-1:0] in_level, mem_req_level, wlevel;
  coord_t in_x, in_y, mem_req_x, mem_req_y, wx, wy;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  pix_t mem_rsp_data, wdata;
  logic we, wr_done, skipped;
  int checks = 0, failures = 0;

  decompression_unit dut (.clk, .rst_n, .in_valid, .in_ready, .in_level, .in_x, .in_y, .in_keep,
    .mem_req_valid, .mem_req_ready, .mem_req_level, .mem_req_x, .mem_req_y,
    .mem_rsp_valid, .mem_rsp_data, .we, .wlevel, .wx, .wy, .wdata, .wr_done, .skipped);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic pix_t pixval(int l, int x, int y);
    pix_t p;
    for (int c = 0; c < LANES; c++) p[c] = data_t'((l * 331 + x * 57 + y * 13 + c) % 4093 + 1);
    return p;
  endfunction

  // behavioural external memory
  int nreq = 0, lat = 0;
  logic pend = 0;
  logic [$clog2(NL)-1:0] pl;
  coord_t px, py;
  always @(posedge clk) begin
    mem_rsp_valid <= 1'b0;
    if (pend) begin
      if (lat == 0) begin
        mem_rsp_valid <= 1'b1;
        mem_rsp_data  <= pixval(int'(pl), int'(px), int'(py));
        pend <= 1'b0;
      end else lat <= lat - 1;
    end else if (mem_req_valid && mem_req_ready) begin
      pend <= 1'b1; lat <= $urandom_range(0, 5);
      pl <= mem_req_level; px <= mem_req_x; py <= mem_req_y;
      nreq++;
    end
  end
  always @(negedge clk) mem_req_ready = 1'($urandom) | 1'($urandom);

  // write monitor
  int nwr = 0, nskip = 0;
  logic [$clog2(NL)-1:0] exp_l;
  coord_t exp_x, exp_y;
  logic exp_keep;
  always @(posedge clk) if (rst_n) begin
    if (we) begin
      nwr++;
      checks++;
      if (wlevel != exp_l || wx != exp_x || wy != exp_y ||
          wdata != (exp_keep ? pixval(int'(exp_l), int'(exp_x), int'(exp_y)) : pix_t'('0))) begin
        failures++;
        $display("write (%0d,%0d,%0d) wrong, expected (%0d,%0d,%0d) keep %0d", wlevel, wx, wy, exp_l, exp_x, exp_y, exp_keep);
      end
    end
    if (skipped) nskip++;
  end

  initial begin
    int nkeep;
    in_valid = 0; in_keep = 0; in_level = '0; in_x = '0; in_y = '0;
    mem_rsp_valid = 0; mem_rsp_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    nkeep = 0;
    for (int t = 0; t < 300; t++) begin
      in_valid = 1;
      in_level = 2'($urandom); in_x = coord_t'($urandom_range(0, 63)); in_y = coord_t'($urandom_range(0, 63));
      in_keep  = ($urandom_range(0, 2) != 0);
      exp_l = in_level; exp_x = in_x; exp_y = in_y; exp_keep = in_keep;
      nkeep += int'(in_keep);
      while (!in_ready) @(negedge clk);
      @(negedge clk);
      in_valid = 0;
      while (!in_ready) @(negedge clk);
    end
    @(negedge clk);
    checks++;
    if (nwr != 300 || nreq != nkeep || nskip != 300 - nkeep) begin
      failures++;
      $display("writes %0d requests %0d (kept %0d) skipped %0d", nwr, nreq, nkeep, nskip);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
