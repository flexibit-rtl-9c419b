// Testbench: reduction tree. Primitives are generated in the testbench from
// random mantissas; each reduced product must equal the integer product of
// the two mantissas, and unused product slots must be zero.
module tb_fb_fbrt;
  logic [143:0] prim;
  logic [4:0]   ma, mw;
  logic [5:0]   nprod;
  logic [23:0]  prod [36];
  int checks = 0, failures = 0;

  fb_fbrt dut (.prim, .ma, .mw, .nprod, .prod);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      int a_m, w_m, np;
      int av [36], wv [36];
      a_m = 1 + int'($urandom % 12);
      w_m = 1 + int'($urandom % 12);
      np = 144 / (a_m * w_m);
      if (np > 36) np = 36;
      if (np == 0) begin a_m = 12; w_m = 12; np = 1; end
      prim = '0;
      for (int q = 0; q < np; q++) begin
        av[q] = int'($urandom) & ((1 << a_m) - 1);
        wv[q] = int'($urandom) & ((1 << w_m) - 1);
        for (int j = 0; j < w_m; j++)
          for (int i = 0; i < a_m; i++)
            prim[q*a_m*w_m + j*a_m + i] = av[q][i] & wv[q][j];
      end
      ma = 5'(a_m); mw = 5'(w_m); nprod = 6'(np);
      #1;
      for (int q = 0; q < 36; q++) begin
        int expv;
        expv = (q < np) ? av[q] * wv[q] : 0;
        checks++;
        if (int'(prod[q]) != expv) begin
          failures++;
          if (failures < 10) $display("FAIL ma=%0d mw=%0d q=%0d got %0d exp %0d", a_m, w_m, q, prod[q], expv);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
