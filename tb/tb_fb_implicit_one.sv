// Testbench: implicit-one correction. Given raw products A*W, the FP-mode
// output must be (2^ma + A) * (2^mw + W) for every (activation, weight)
// pairing of the outer product; in integer mode the raw product is passed.
module tb_fb_implicit_one;
  logic [23:0] prod [36];
  logic [11:0] act_man, wgt_man;
  logic [4:0]  ma, mw, na;
  logic [5:0]  nprod;
  logic        int_mode;
  logic [25:0] sig [36];
  int checks = 0, failures = 0;

  fb_implicit_one dut (.prod, .act_man, .wgt_man, .ma, .mw, .na, .nprod, .int_mode, .sig);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      int a_m, w_m, n_a, n_w, np;
      a_m = 1 + int'($urandom % 6);
      w_m = 1 + int'($urandom % 6);
      n_a = 12 / a_m; n_w = 12 / w_m;
      if (n_a * n_w > 36) n_w = 36 / n_a;
      np = n_a * n_w;
      act_man = 12'($urandom); wgt_man = 12'($urandom);
      int_mode = ($urandom % 4 == 0);
      for (int q = 0; q < 36; q++) begin
        int av, wv;
        av = int'(act_man >> ((q % n_a) * a_m)) & ((1 << a_m) - 1);
        wv = int'(wgt_man >> ((q / n_a) * w_m)) & ((1 << w_m) - 1);
        prod[q] = (q < np) ? 24'(av * wv) : 24'($urandom);
      end
      ma = 5'(a_m); mw = 5'(w_m); na = 5'(n_a); nprod = 6'(np);
      #1;
      for (int q = 0; q < np; q++) begin
        int av, wv, expv;
        av = int'(act_man >> ((q % n_a) * a_m)) & ((1 << a_m) - 1);
        wv = int'(wgt_man >> ((q / n_a) * w_m)) & ((1 << w_m) - 1);
        expv = int_mode ? av * wv : ((1 << a_m) + av) * ((1 << w_m) + wv);
        checks++;
        if (int'(sig[q]) != expv) begin
          failures++;
          if (failures < 10) $display("FAIL q=%0d got %0d exp %0d", q, sig[q], expv);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
