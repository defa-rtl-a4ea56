// tb_recfg_pe: checks the reconfigurable PE in both modes. BA mode is compared with
// the textbook bilinear formula evaluated in floating point (the PE truncates after
// each multiply, so up to 3 LSB difference is allowed) and the weighted output must be
// exactly prob * S. MM mode must give the four exact products q*w[i].
module tb_recfg_pe;
  import defa_pkg::*;

  pe_mode_e mode;
  data_t n [4];
  frac_t t0, t1;
  prob_t prob;
  data_t q;
  data_t w [4];
  acc_t  ba_out;
  data_t s_out;
  acc_t  mm_out [4];
  int checks = 0, failures = 0;

  recfg_pe dut (.mode, .n, .t0, .t1, .prob, .q, .w, .ba_out, .s_out, .mm_out);

  function automatic real bi_ref(data_t a [4], frac_t ty, frac_t tx);
    real fy, fx;
    fy = real'(ty) / 256.0;
    fx = real'(tx) / 256.0;
    return real'(a[0]) * (1.0 - fx) * (1.0 - fy) + real'(a[1]) * fx * (1.0 - fy)
         + real'(a[2]) * (1.0 - fx) * fy + real'(a[3]) * fx * fy;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mode = MODE_BA;
    q = '0;
    for (int i = 0; i < 4; i++) w[i] = '0;
    for (int it = 0; it < 400; it++) begin
      real r;
      mode = MODE_BA;
      for (int i = 0; i < 4; i++) n[i] = data_t'($urandom);
      t0   = (it % 10 == 0) ? frac_t'(0) : frac_t'($urandom);
      t1   = (it % 10 == 0) ? frac_t'(0) : frac_t'($urandom);
      prob = prob_t'($urandom);
      #1;
      r = bi_ref(n, t0, t1);
      checks++;
      if ((real'(s_out) - r) > 3.0 || (r - real'(s_out)) > 3.0) begin
        failures++;
        $display("BI mismatch n=%0d %0d %0d %0d t0=%0d t1=%0d S=%0d ref=%f", n[0], n[1], n[2], n[3], t0, t1, s_out, r);
      end
      checks++;
      if (ba_out != acc_t'(s_out) * acc_t'({1'b0, prob})) begin
        failures++;
        $display("AG mismatch S=%0d prob=%0d out=%0d", s_out, prob, ba_out);
      end
      if (t0 == 0 && t1 == 0) begin
        checks++;
        if (s_out != n[0]) failures++;
      end
      mode = MODE_MM;
      q = data_t'($urandom);
      for (int i = 0; i < 4; i++) w[i] = data_t'($urandom);
      #1;
      for (int i = 0; i < 4; i++) begin
        checks++;
        if (mm_out[i] != acc_t'(q) * acc_t'(w[i])) begin
          failures++;
          $display("MM mismatch i=%0d q=%0d w=%0d out=%0d", i, q, w[i], mm_out[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
