// Testbench: output conversion. Random accumulators (normalised magnitude
// with random exponent) are converted to random output formats and compared
// with a real-valued reference conversion, with and without MX scales, and
// in integer mode with saturation.
module tb_fb_out_conv;
  import flexibit_pkg::*;
  import tb_ref_pkg::*;
  logic        acc_s, int_mode, mx_en;
  acce_t       acc_e;
  accm_t       acc_m;
  logic [3:0]  ea, ew, eo;
  logic [4:0]  po, mo;
  logic [7:0]  scale_a, scale_w;
  logic [15:0] elem;
  int checks = 0, failures = 0;

  fb_out_conv dut (.acc_s, .acc_e, .acc_m, .int_mode, .mx_en, .ea, .ew, .po, .eo, .mo,
                   .scale_a, .scale_w, .elem);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      int exp_v, a_e, w_e, o_e, o_p;
      real v;
      int_mode = ($urandom % 5 == 0);
      mx_en = ($urandom % 3 == 0);
      a_e = 1 + int'($urandom % 5); w_e = 1 + int'($urandom % 5);
      o_e = 2 + int'($urandom % 4); o_p = o_e + 2 + int'($urandom % 8);
      ea = 4'(a_e); ew = 4'(w_e); eo = 4'(o_e); po = 5'(o_p); mo = 5'(o_p - 1 - o_e);
      scale_a = 8'(120 + $urandom % 16); scale_w = 8'(120 + $urandom % 16);
      acc_s = $urandom % 2;
      if (int_mode) begin
        acc_e = '0;
        acc_m = 32'($urandom % 3000);
        exp_v = int_encode(acc_s ? -longint'(acc_m) : longint'(acc_m), o_p);
      end else begin
        acc_m = 32'($urandom) | 32'h4000_0000;
        acc_m[31] = 1'b0;
        if ($urandom % 20 == 0) acc_m = '0;
        acc_e = acce_t'(int'($urandom % 40));
        begin
          int sh;
          sh = int'(acc_e) - bias_of(a_e) - bias_of(w_e);
          if (mx_en) sh = sh + int'(scale_a) - 127 + int'(scale_w) - 127;
          v = real'(acc_m) / pow2(30) * pow2(sh);
        end
        if (acc_s) v = -v;
        exp_v = fp_encode(v, o_p, o_e);
      end
      #1;
      checks++;
      if (int'(elem) != exp_v) begin
        failures++;
        if (failures < 10) $display("FAIL int=%0d got %h exp %h", int_mode, elem, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
