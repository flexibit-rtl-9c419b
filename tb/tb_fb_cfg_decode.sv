// Testbench: control signal generator. Checks the element and product
// counts for the formats used in the evaluation (FP16, FP8 E4M3/E5M2, FP6,
// FP5, FP4 variants, INT8 x INT4) against hand-computed values, and the
// FBEA carry-break vector.
module tb_fb_cfg_decode;
  import flexibit_pkg::*;
  fb_cfg_t cfg;
  fb_ctl_t ctl;
  int checks = 0, failures = 0;

  fb_cfg_decode dut (.cfg, .ctl);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int im, input int pa, input int ea, input int pw, input int ew,
                       input int ena, input int enw, input int ema, input int emw);
    cfg = '0;
    cfg.int_mode = 1'(im);
    cfg.pa = 5'(pa); cfg.ea = 4'(ea); cfg.pw = 5'(pw); cfg.ew = 4'(ew);
    cfg.po = 5'd16; cfg.eo = 4'd5;
    #1;
    checks++;
    if (int'(ctl.na) != ena || int'(ctl.nw) != enw || int'(ctl.ma) != ema || int'(ctl.mw) != emw ||
        int'(ctl.nprod) != ena * enw || int'(ctl.mo) != (im ? 15 : 10)) begin
      failures++;
      $display("FAIL cfg pa=%0d ea=%0d pw=%0d ew=%0d: na=%0d nw=%0d ma=%0d mw=%0d", pa, ea, pw, ew,
               ctl.na, ctl.nw, ctl.ma, ctl.mw);
    end
    for (int i = 0; i < 144; i++) begin
      int sw;
      sw = ((im ? 0 : (ea > ew ? ea : ew))) + 1;
      checks++;
      if (ctl.fbea_ctrl[i] != ((i + 1) % sw == 0)) failures++;
    end
  endtask

  initial begin
    check(0, 16, 5, 16, 5, 1, 1, 10, 10);  // FP16 x FP16
    check(0, 8, 4, 8, 4, 3, 3, 3, 3);      // FP8 E4M3
    check(0, 8, 5, 8, 5, 2, 2, 2, 2);      // FP8 E5M2: two 5-bit exponents fit R_E
    check(0, 6, 3, 5, 2, 4, 4, 2, 2);      // FP6 E3M2 x FP5 E2M2
    check(0, 6, 2, 6, 2, 4, 4, 3, 3);      // FP6 E2M3
    check(0, 4, 2, 4, 2, 6, 6, 1, 1);      // FP4 E2M1 (36 products)
    check(0, 4, 1, 4, 1, 6, 6, 2, 2);      // FP4 E1M2
    check(0, 4, 3, 4, 3, 4, 4, 0, 0);      // FP4 E3M0: exponent register limits
    check(0, 16, 5, 6, 3, 1, 4, 10, 2);    // FP16 x FP6
    check(1, 8, 0, 4, 0, 1, 4, 7, 3);      // INT8 x INT4
    check(1, 4, 0, 4, 0, 4, 4, 3, 3);      // INT4 x INT4: mantissa register limits
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
