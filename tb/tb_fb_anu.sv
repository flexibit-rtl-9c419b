// Testbench: accumulation and normalization unit. Streams of aligned
// signed products are accumulated in all 36 slots and compared after every
// step with a real-valued running sum (exact for the operand ranges used);
// also checks clear, integer-mode accumulation and slots beyond nprod.
module tb_fb_anu;
  import flexibit_pkg::*;
  import tb_ref_pkg::*;
  logic  clk = 0, rst_n = 0, en = 0, clear = 0, int_mode = 0;
  logic [5:0] nprod;
  logic  psign [36], acc_s [36], acc_zero [36];
  accm_t p_al [36], a_al [36], acc_m [36];
  acce_t res_exp [36], acc_e [36];
  real   ref_v [36];
  longint ref_i [36];
  int checks = 0, failures = 0;

  fb_anu dut (.clk, .rst_n, .en, .clear, .int_mode, .nprod, .psign, .p_al, .a_al, .res_exp,
              .acc_s, .acc_e, .acc_m, .acc_zero);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real accval(input int k);
    real v;
    v = real'(acc_m[k]) * pow2(int'(acc_e[k]) - 30);
    return acc_s[k] ? -v : v;
  endfunction

  // drive one step: product k = (-1)^s * m * 2^(e-30), aligned here as the
  // ENU/CST would do (the shifts lose no bits for these operands)
  task automatic step(input bit first);
    for (int k = 0; k < 36; k++) begin
      int pe, ae, d;
      longint pm, am;
      real pv;
      pm = longint'(32'h4000_0000 | ($urandom & 32'h3FF0_0000));
      pe = 10 + int'($urandom % 6);
      psign[k] = $urandom % 2;
      pv = real'(pm) * pow2(pe - 30);
      if (psign[k]) pv = -pv;
      am = first ? 0 : longint'(acc_m[k]);
      ae = first ? 0 : int'(acc_e[k]);
      if (am == 0) begin
        p_al[k] = accm_t'(pm); a_al[k] = '0; res_exp[k] = acce_t'(pe);
      end else if (pe >= ae) begin
        p_al[k] = accm_t'(pm); a_al[k] = accm_t'(am >> (pe - ae)); res_exp[k] = acce_t'(pe);
      end else begin
        p_al[k] = accm_t'(pm >> (ae - pe)); a_al[k] = accm_t'(am); res_exp[k] = acce_t'(ae);
      end
      ref_v[k] = first ? pv : ref_v[k] + pv;
    end
    en = 1; clear = first;
    @(posedge clk); #1;
    en = 0; clear = 0;
    #1;
  endtask

  initial begin
    nprod = 6'd36;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int t = 0; t < 3; t++) begin
      for (int s = 0; s < 4; s++) begin
        step(s == 0);
        for (int k = 0; k < 36; k++) begin
          real diff, mag;
          diff = accval(k) - ref_v[k];
          mag = (ref_v[k] < 0) ? -ref_v[k] : ref_v[k];
          checks++;
          // the accumulator holds 31 significant bits: allow truncation error
          if ((diff < 0 ? -diff : diff) > mag * pow2(-28) + 1e-30) begin
            failures++;
            if (failures < 10) $display("FAIL k=%0d got %g exp %g", k, accval(k), ref_v[k]);
          end
        end
      end
    end
    // integer mode: exact signed sums, no renormalisation; only 20 slots
    int_mode = 1; nprod = 6'd20;
    for (int s = 0; s < 5; s++) begin
      for (int k = 0; k < 36; k++) begin
        longint v;
        v = longint'($urandom % 1000);
        psign[k] = $urandom % 2;
        p_al[k] = accm_t'(v);
        a_al[k] = (s == 0) ? '0 : acc_m[k];
        res_exp[k] = '0;
        if (k < 20) ref_i[k] = ((s == 0) ? 0 : ref_i[k]) + (psign[k] ? -v : v);
      end
      en = 1; clear = (s == 0);
      @(posedge clk); #1;
      en = 0; clear = 0;
      #1;
      for (int k = 0; k < 20; k++) begin
        longint got;
        got = acc_s[k] ? -longint'(acc_m[k]) : longint'(acc_m[k]);
        checks++;
        if (got != ref_i[k]) begin
          failures++;
          if (failures < 10) $display("FAIL int k=%0d got %0d exp %0d", k, got, ref_i[k]);
        end
      end
    end
    // clear makes the accumulators read as zero
    clear = 1; #1;
    checks++;
    if (!acc_zero[0] || acc_m[5] != '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
