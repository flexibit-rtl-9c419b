// Testbench: concat-shift tree. Product significands must be placed with
// their binary point at the accumulator's leading-one position and the
// selected operand shifted right by the given amount.
module tb_fb_cst;
  import flexibit_pkg::*;
  logic [25:0] psig [36];
  logic        pzero [36], shift_prod [36], int_mode;
  accm_t       acc_m [36], p_al [36], a_al [36];
  logic [5:0]  shamt [36], mm;
  int checks = 0, failures = 0;

  fb_cst dut (.psig, .pzero, .acc_m, .shamt, .shift_prod, .mm, .int_mode, .p_al, .a_al);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      int m2;
      m2 = 2 + int'($urandom % 20);
      mm = 6'(m2);
      int_mode = ($urandom % 6 == 0);
      for (int k = 0; k < 36; k++) begin
        psig[k] = 26'($urandom) & 26'((1 << (m2 + 2)) - 1);
        acc_m[k] = 32'($urandom);
        shamt[k] = 6'($urandom % 40);
        shift_prod[k] = $urandom % 2;
        pzero[k] = ($urandom % 8 == 0);
      end
      #1;
      for (int k = 0; k < 36; k++) begin
        longint pp, ep, ea;
        pp = pzero[k] ? 0 : (int_mode ? longint'(psig[k]) : (longint'(psig[k]) << (30 - m2)));
        ep = shift_prod[k] ? (pp >> shamt[k]) : pp;
        ea = shift_prod[k] ? longint'(acc_m[k]) : (longint'(acc_m[k]) >> shamt[k]);
        checks++;
        if (longint'(p_al[k]) != (ep & 64'hFFFF_FFFF) || longint'(a_al[k]) != ea) begin
          failures++;
          if (failures < 10) $display("FAIL k=%0d", k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
