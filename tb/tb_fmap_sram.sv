// tb_fmap_sram: fills every level's bounded range around a reference point with
// random pixel vectors, then reads random 2x2 neighbourhoods on all four levels at once
// (16 banks in one clock) and compares with a model; read data appear one clock after
// the address. Then slides the reference point by one column, writes only the entering
// column and checks that the old, overlapping pixels are still read correctly (reuse).
module tb_fmap_sram;
  import defa_pkg::*;

  logic clk = 0;
  logic we, re;
  logic [$clog2(NL)-1:0] wlevel;
  coord_t wx, wy;
  pix_t wdata;
  baddr_t raddr [BANKS];
  pix_t rdata [BANKS];
  int checks = 0, failures = 0;

  fmap_sram dut (.clk, .we, .wlevel, .wx, .wy, .wdata, .re, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic pix_t pixval(int l, int x, int y, int gen);
    pix_t p;
    for (int c = 0; c < LANES; c++) p[c] = data_t'((l * 7919 + x * 131 + y * 17 + c * 3 + gen * 1009) % 4096);
    return p;
  endfunction

  int rxp [NL], ryp [NL];

  task automatic write_px(int l, int x, int y);
    we = 1; wlevel = 2'(l); wx = coord_t'(x); wy = coord_t'(y); wdata = pixval(l, x, y, 0);
    @(negedge clk);
    we = 0;
  endtask

  task automatic check_reads(int n);
    for (int t = 0; t < n; t++) begin
      int nx [NL], ny [NL];
      for (int l = 0; l < NL; l++) begin
        int br;
        br = br_size(l);
        nx[l] = rxp[l] - br / 2 + $urandom_range(0, br - 2);
        ny[l] = ryp[l] - br / 2 + $urandom_range(0, br - 2);
        for (int k = 0; k < 4; k++) begin
          int x, y;
          x = nx[l] + (k & 1); y = ny[l] + (k >> 1);
          raddr[4*l + (y % 2) * 2 + (x % 2)] = addr_of(coord_t'(x), coord_t'(y), br);
        end
      end
      re = 1;
      @(negedge clk);
      re = 0;
      for (int l = 0; l < NL; l++) for (int k = 0; k < 4; k++) begin
        int x, y;
        x = nx[l] + (k & 1); y = ny[l] + (k >> 1);
        checks++;
        if (rdata[4*l + (y % 2) * 2 + (x % 2)] != pixval(l, x, y, 0)) begin
          failures++;
          $display("level %0d pixel (%0d,%0d) wrong", l, x, y);
        end
      end
    end
  endtask

  initial begin
    we = 0; re = 0; wlevel = '0; wx = '0; wy = '0; wdata = '0;
    for (int b = 0; b < BANKS; b++) raddr[b] = '0;
    @(negedge clk);
    for (int l = 0; l < NL; l++) begin
      int br;
      br = br_size(l);
      rxp[l] = 20; ryp[l] = 20;
      for (int x = rxp[l] - br / 2; x < rxp[l] + br / 2; x++)
        for (int y = ryp[l] - br / 2; y < ryp[l] + br / 2; y++) write_px(l, x, y);
    end
    check_reads(200);
    // slide by one column: write only the entering column
    for (int l = 0; l < NL; l++) begin
      int br;
      br = br_size(l);
      rxp[l]++;
      for (int y = ryp[l] - br / 2; y < ryp[l] + br / 2; y++) write_px(l, rxp[l] + br / 2 - 1, y);
    end
    check_reads(200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
