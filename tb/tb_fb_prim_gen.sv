// Testbench: primitive generator. For random mantissa registers and widths
// every primitive position p*ma*mw + j*ma + i must hold the AND of
// activation bit i of activation p%na and weight bit j of weight p/na.
module tb_fb_prim_gen;
  logic [11:0]  act_man, wgt_man;
  logic [4:0]   ma, mw, na;
  logic [5:0]   nprod;
  logic [143:0] prim;
  int checks = 0, failures = 0;

  fb_prim_gen dut (.act_man, .wgt_man, .ma, .mw, .na, .nprod, .prim);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      int a_m, w_m, n_a, n_w, np;
      logic [143:0] exp_p;
      a_m = 1 + int'($urandom % 6);
      w_m = 1 + int'($urandom % 6);
      n_a = 12 / a_m; n_w = 12 / w_m;
      np  = n_a * n_w;
      if (np > 36) np = 36;
      while (np * a_m * w_m > 144) np--;
      if (np < n_a) n_a = np;
      np = (np / n_a) * n_a;
      act_man = 12'($urandom); wgt_man = 12'($urandom);
      ma = 5'(a_m); mw = 5'(w_m); na = 5'(n_a); nprod = 6'(np);
      #1;
      exp_p = '0;
      for (int q = 0; q < np; q++)
        for (int j = 0; j < w_m; j++)
          for (int i = 0; i < a_m; i++)
            exp_p[q*a_m*w_m + j*a_m + i] = act_man[(q % n_a)*a_m + i] & wgt_man[(q / n_a)*w_m + j];
      checks++;
      if (prim != exp_p) begin
        failures++;
        if (failures < 5) $display("FAIL ma=%0d mw=%0d na=%0d np=%0d", a_m, w_m, n_a, np);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
