// Testbench: processing element. For several format pairs (FP6 E3M2 x FP5
// E2M2, FP8 E4M3 with MX scales, FP4 E2M1 with 36 products, FP16, INT8 x
// INT4 sign-magnitude) it fills the local buffer with K random operand
// registers, runs the K steps back to back and compares every accumulator
// output with a real-valued dot-product reference. Each output must be
// ready two cycles after the last step. Exponents are drawn from a range in
// which the accumulator is exact, so the only rounding is the final
// truncation to the output format, which the reference applies too.
module tb_fb_pe;
  import flexibit_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  fb_cfg_t cfg;
  fb_ctl_t ctl;
  logic we_a = 0, we_w = 0, step = 0, step_clear = 0, scale_ld = 0;
  logic [4:0] waddr_a, waddr_w, step_addr;
  logic [23:0] wdata_a, wdata_w;
  logic [5:0] out_sel;
  logic [15:0] out_elem;
  int checks = 0, failures = 0;

  fb_cfg_decode u_dec (.cfg, .ctl);
  fb_pe dut (.clk, .rst_n, .cfg, .ctl, .we_a, .we_w, .waddr_a, .wdata_a, .waddr_w, .wdata_w,
             .step, .step_clear, .step_addr, .scale_ld, .out_sel, .out_elem);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int gen(input bit im, input int p, input int e, input int elo, input int ehi);
    int m, s, ex, mn;
    m = p - 1 - e;
    s = $urandom % 2;
    if ($urandom % 16 == 0) return 0;
    mn = (m > 0) ? int'($urandom) & ((1 << m) - 1) : 0;
    if (im) return s | (mn << 1);
    ex = elo + int'($urandom % (ehi - elo + 1));
    return s | (ex << 1) | (mn << (1 + e));
  endfunction

  task automatic run_case(input bit im, input int pa, input int ea, input int pw, input int ew,
                          input int po, input int eo, input bit mx, input int K,
                          input int alo, input int ahi, input int wlo, input int whi,
                          input int exp_na, input int exp_nw);
    int av [30][12], wv [30][12];
    int na, nw;
    cfg = '0;
    cfg.int_mode = im; cfg.mx_en = mx;
    cfg.pa = 5'(pa); cfg.ea = 4'(ea); cfg.pw = 5'(pw); cfg.ew = 4'(ew);
    cfg.po = 5'(po); cfg.eo = 4'(eo);
    cfg.scale_a = 8'(125 + $urandom % 5); cfg.scale_w = 8'(126 + $urandom % 4);
    #1;
    na = int'(ctl.na); nw = int'(ctl.nw);
    checks++;
    if (na != exp_na || nw != exp_nw) begin
      failures++;
      $display("FAIL element counts %0d %0d", na, nw);
    end
    for (int k = 0; k < K; k++) begin
      logic [23:0] ra, rw;
      ra = 24'($urandom); rw = 24'($urandom);   // unused bits carry garbage
      for (int i = 0; i < na; i++) begin
        av[k][i] = gen(im, pa, ea, alo, ahi);
        for (int b = 0; b < pa; b++) ra[i*pa + b] = av[k][i][b];
      end
      for (int j = 0; j < nw; j++) begin
        wv[k][j] = gen(im, pw, ew, wlo, whi);
        for (int b = 0; b < pw; b++) rw[j*pw + b] = wv[k][j][b];
      end
      @(negedge clk);
      we_a = 1; waddr_a = 5'(k); wdata_a = ra;
      we_w = 1; waddr_w = 5'(k); wdata_w = rw;
    end
    @(negedge clk); we_a = 0; we_w = 0;
    for (int k = 0; k < K; k++) begin
      step = 1; step_clear = (k == 0); step_addr = 5'(k); scale_ld = (k == 0);
      @(negedge clk);
    end
    step = 0; step_clear = 0; scale_ld = 0;
    @(negedge clk);   // two cycles after the last step was issued
    for (int j = 0; j < nw; j++)
      for (int i = 0; i < na; i++) begin
        int expv;
        out_sel = 6'(j * na + i);
        #1;
        if (im) begin
          longint acc;
          acc = 0;
          for (int k = 0; k < K; k++) acc += longint'(int_decode(av[k][i], pa) * int_decode(wv[k][j], pw));
          expv = int_encode(acc, po);
        end else begin
          real acc;
          acc = 0.0;
          for (int k = 0; k < K; k++) acc += fp_decode(av[k][i], pa, ea) * fp_decode(wv[k][j], pw, ew);
          if (mx) acc = acc * pow2(int'(cfg.scale_a) - 127 + int'(cfg.scale_w) - 127);
          expv = fp_encode(acc, po, eo);
        end
        checks++;
        if (int'(out_elem) != expv) begin
          failures++;
          if (failures < 10) $display("FAIL fmt pa=%0d pw=%0d out (%0d,%0d) got %h exp %h", pa, pw, i, j, out_elem, expv);
        end
      end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 4; r++) begin
      run_case(0, 6, 3, 5, 2, 16, 5, 0, 30, 0, 7, 0, 3, 4, 4);   // FP6 E3M2 x FP5 E2M2 -> FP16
      run_case(0, 8, 4, 8, 4, 16, 5, 1, 12, 5, 9, 5, 9, 3, 3);   // FP8 E4M3, MX scales
      run_case(0, 4, 2, 4, 2, 12, 5, 0, 20, 0, 3, 0, 3, 6, 6);   // FP4 E2M1, 36 products
      run_case(0, 16, 5, 16, 5, 16, 5, 0, 8, 12, 18, 12, 18, 1, 1); // FP16 x FP16
      run_case(0, 16, 5, 6, 3, 16, 5, 0, 8, 12, 18, 0, 7, 1, 4); // FP16 act x FP6 weight
      run_case(1, 8, 0, 4, 0, 16, 0, 0, 30, 0, 0, 0, 0, 1, 4);   // INT8 x INT4
      run_case(1, 4, 0, 4, 0, 8, 0, 0, 30, 0, 0, 0, 0, 4, 4);    // INT4 x INT4, saturating INT8 out
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
