// tb_compression_unit: all 2^16 point masks are not needed; 3000 random masks plus
// the all-zero and all-one masks. For every level the packed list must hold the kept
// point indices in increasing order, the count must match, and max_cnt must be the
// largest count.
module tb_compression_unit;
  import defa_pkg::*;

  logic [NPTS-1:0] mask;
  logic [$clog2(NP)-1:0]   list [NL][NP];
  logic [$clog2(NP+1)-1:0] cnt [NL];
  logic [$clog2(NP+1)-1:0] max_cnt;
  int checks = 0, failures = 0;

  compression_unit dut (.mask, .list, .cnt, .max_cnt);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3002; t++) begin
      int mx;
      mask = (t == 0) ? '0 : (t == 1) ? '1 : NPTS'($urandom);
      #1;
      mx = 0;
      for (int l = 0; l < NL; l++) begin
        int c;
        c = 0;
        for (int p = 0; p < NP; p++) begin
          if (mask[l*NP + p]) begin
            checks++;
            if (int'(list[l][c]) != p) begin
              failures++;
              $display("mask %h level %0d entry %0d = %0d expected %0d", mask, l, c, list[l][c], p);
            end
            c++;
          end
        end
        checks++;
        if (int'(cnt[l]) != c) failures++;
        if (c > mx) mx = c;
      end
      checks++;
      if (int'(max_cnt) != mx) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
