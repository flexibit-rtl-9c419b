// Testbench: exponent normalization unit. Random product and accumulator
// exponents: the value with the smaller exponent must be selected for
// shifting, by the exponent difference (saturated at 63); zero operands and
// integer mode must not shift.
module tb_fb_enu;
  import flexibit_pkg::*;
  logic [9:0]  pexp [36];
  logic        pzero [36], acc_zero [36], shift_prod [36], int_mode;
  acce_t       acc_exp [36], res_exp [36];
  logic [5:0]  shamt [36];
  int checks = 0, failures = 0;

  fb_enu dut (.pexp, .pzero, .acc_exp, .acc_zero, .int_mode, .shamt, .shift_prod, .res_exp);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      int_mode = ($urandom % 8 == 0);
      for (int k = 0; k < 36; k++) begin
        pexp[k] = 10'($urandom % 200);
        acc_exp[k] = acce_t'(int'($urandom % 300) - 50);
        pzero[k] = ($urandom % 10 == 0);
        acc_zero[k] = ($urandom % 10 == 0);
      end
      #1;
      for (int k = 0; k < 36; k++) begin
        int d, es, er; bit sp;
        d = int'(pexp[k]) - int'(acc_exp[k]);
        es = 0; sp = 0; er = int'(acc_exp[k]);
        if (int_mode) er = 0;
        else if (acc_zero[k]) er = int'(pexp[k]);
        else if (pzero[k]) er = int'(acc_exp[k]);
        else if (d >= 0) begin er = int'(pexp[k]); es = (d > 63) ? 63 : d; end
        else begin sp = 1; es = (-d > 63) ? 63 : -d; end
        checks++;
        if (int'(shamt[k]) != es || shift_prod[k] != sp || int'(res_exp[k]) != er) begin
          failures++;
          if (failures < 10) $display("FAIL k=%0d d=%0d", k, d);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
