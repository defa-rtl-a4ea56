// tb_sample_addr_gen: random reference points and offsets on levels 0 and 1 (bounded
// ranges 8 and 16). The expected position is computed in floating point: offset
// clipped to [-BR/2, BR/2-1) pixels, position clamped to [0, W-1); x0/y0 = floor,
// t1/t0 = fraction * 256. For each of the four neighbours the bank {y[0],x[0]} must
// carry the address ((y mod BR)/2)*(BR/2) + (x mod BR)/2, and the neighbours must sit
// inside the bounded range around the reference point.
module tb_sample_addr_gen;
  import defa_pkg::*;

  int checks = 0, failures = 0;

  coord_t rx [2], ry [2], x0 [2], y0 [2];
  off_t   ox [2], oy [2];
  frac_t  t0 [2], t1 [2];
  baddr_t ba0 [4], ba1 [4];

  sample_addr_gen #(.LVL(0)) dut0 (.ref_x(rx[0]), .ref_y(ry[0]), .off_x(ox[0]), .off_y(oy[0]),
                                   .x0(x0[0]), .y0(y0[0]), .t0(t0[0]), .t1(t1[0]), .baddr(ba0));
  sample_addr_gen #(.LVL(1)) dut1 (.ref_x(rx[1]), .ref_y(ry[1]), .off_x(ox[1]), .off_y(oy[1]),
                                   .x0(x0[1]), .y0(y0[1]), .t0(t0[1]), .t1(t1[1]), .baddr(ba1));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real place(int r, int o, int br, int w);
    real off, s;
    off = real'(o) / 256.0;
    if (off < -real'(br / 2)) off = -real'(br / 2);
    if (off > real'(br / 2 - 1) - 1.0 / 256.0) off = real'(br / 2 - 1) - 1.0 / 256.0;
    s = real'(r) + off;
    if (s < 0.0) s = 0.0;
    if (s > real'(w - 1) - 1.0 / 256.0) s = real'(w - 1) - 1.0 / 256.0;
    return s;
  endfunction

  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int d = 0; d < 2; d++) begin
        rx[d] = coord_t'($urandom_range(0, fmap_w(d) - 1));
        ry[d] = coord_t'($urandom_range(0, fmap_h(d) - 1));
        ox[d] = off_t'($urandom_range(0, 6000)) - off_t'(3000);
        oy[d] = off_t'($urandom_range(0, 6000)) - off_t'(3000);
      end
      #1;
      for (int d = 0; d < 2; d++) begin
        real sx, sy;
        int ex0, ey0, br;
        br = br_size(d);
        sx = place(int'(rx[d]), int'(ox[d]), br, fmap_w(d));
        sy = place(int'(ry[d]), int'(oy[d]), br, fmap_h(d));
        ex0 = int'($floor(sx));
        ey0 = int'($floor(sy));
        checks++;
        if (int'(x0[d]) != ex0 || int'(y0[d]) != ey0 ||
            int'(t1[d]) != int'((sx - real'(ex0)) * 256.0 + 0.01) ||
            int'(t0[d]) != int'((sy - real'(ey0)) * 256.0 + 0.01)) begin
          failures++;
          $display("lvl %0d ref (%0d,%0d) off (%0d,%0d): got x0=%0d y0=%0d t1=%0d t0=%0d exp %0d %0d",
                   d, rx[d], ry[d], ox[d], oy[d], x0[d], y0[d], t1[d], t0[d], ex0, ey0);
        end
        for (int k = 0; k < 4; k++) begin
          int nx, ny, b, a;
          nx = ex0 + (k & 1);
          ny = ey0 + (k >> 1);
          b = (ny % 2) * 2 + (nx % 2);
          a = ((ny % br) / 2) * (br / 2) + (nx % br) / 2;
          checks++;
          if (int'((d == 0) ? ba0[b] : ba1[b]) != a) begin
            failures++;
            $display("lvl %0d neighbour %0d bank %0d addr %0d expected %0d", d, k, b, (d == 0) ? ba0[b] : ba1[b], a);
          end
          checks++;
          if (nx < int'(rx[d]) - br / 2 || nx > int'(rx[d]) + br / 2 - 1 ||
              ny < int'(ry[d]) - br / 2 || ny > int'(ry[d]) + br / 2 - 1) begin
            failures++;
            $display("lvl %0d neighbour (%0d,%0d) outside bounded range of (%0d,%0d)", d, nx, ny, rx[d], ry[d]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
