// Testbench: separator. Random registers in random formats; each element's
// sign, exponent and mantissa field must appear at its packed position in
// the sign, exponent and mantissa registers, and unused bits must be zero.
module tb_fb_separator;
  logic [23:0] reg_in;
  logic [4:0]  p, n_elem;
  logic [3:0]  e;
  logic [11:0] sign_reg, exp_reg, man_reg;
  int checks = 0, failures = 0;

  fb_separator dut (.reg_in, .p, .e, .n_elem, .sign_reg, .exp_reg, .man_reg);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      int pp, ee, mm, n;
      logic [11:0] es, ee_r, em;
      pp = 3 + int'($urandom % 14);
      ee = 1 + int'($urandom % (pp - 2 > 8 ? 8 : pp - 2));
      mm = pp - 1 - ee;
      n = 24 / pp;
      if (12 / ee < n) n = 12 / ee;
      if (mm > 0 && 12 / mm < n) n = 12 / mm;
      reg_in = 24'($urandom);
      p = 5'(pp); e = 4'(ee); n_elem = 5'(n);
      #1;
      es = '0; ee_r = '0; em = '0;
      for (int k = 0; k < n; k++) begin
        int el;
        el = int'((reg_in >> (k * pp))) & ((1 << pp) - 1);
        es[k] = el[0];
        for (int b = 0; b < ee; b++) ee_r[k*ee + b] = el[1 + b];
        for (int b = 0; b < mm; b++) em[k*mm + b] = el[1 + ee + b];
      end
      checks += 3;
      if (sign_reg != es) failures++;
      if (exp_reg != ee_r) failures++;
      if (man_reg != em) begin
        failures++;
        if (failures < 10) $display("FAIL p=%0d e=%0d reg=%h man %h exp %h", pp, ee, reg_in, man_reg, em);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
