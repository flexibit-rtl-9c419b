// Testbench: controller on a 2 x 3 array. Bus readers are modelled by
// random chunk_valid; the test checks that every (row, k) and (column, k)
// local-buffer address is written exactly once, that exactly K compute
// steps are broadcast with the clear on the first, that the drain visits
// every output once in row-major order under random back-pressure, and the
// cycle count of the compute phase (K steps then two pipeline cycles).
module tb_fb_controller;
  import flexibit_pkg::*;
  localparam int X = 2, Y = 3, K = 5;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  fb_cfg_t cfg;
  fb_ctl_t ctl;
  logic rd_start, a_valid = 0, w_valid = 0, a_take, w_take, a_we, w_we;
  logic [5:0] a_chunk_bits, w_chunk_bits, d_sel;
  logic [0:0] a_row;
  logic [1:0] w_col, d_y;
  logic [0:0] d_x;
  logic [4:0] a_addr, w_addr, step_addr;
  logic step, step_clear, scale_ld, d_valid, d_last, d_ready = 0;
  int a_cnt [X][K], w_cnt [Y][K];
  int steps = 0, clears = 0, drained = 0, checks = 0, failures = 0;
  int first_step = -1, last_step = -1, first_drain = -1, cyc = 0;
  int exp_m = 0, exp_n = 0;

  fb_cfg_decode u_dec (.cfg, .ctl);
  fb_controller #(.X(X), .Y(Y)) dut (
    .clk, .rst_n, .start, .tile_k(5'(K)), .cfg, .ctl, .busy, .done, .rd_start,
    .a_chunk_bits, .w_chunk_bits, .a_valid, .w_valid, .a_take, .w_take,
    .a_we, .a_row, .a_addr, .w_we, .w_col, .w_addr, .step, .step_clear, .step_addr, .scale_ld,
    .d_x, .d_y, .d_sel, .d_valid, .d_last, .d_ready);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    cyc++;
    a_valid <= ($urandom % 2 == 0);
    w_valid <= ($urandom % 3 != 0);
    d_ready <= ($urandom % 4 != 0);
    if (a_we) a_cnt[a_row][a_addr]++;
    if (w_we) w_cnt[w_col][w_addr]++;
    if (step) begin
      checks++;
      if (int'(step_addr) != steps) failures++;
      if (step_clear) clears++;
      if (first_step < 0) first_step = cyc;
      last_step = cyc;
      steps++;
    end
    if (d_valid && d_ready) begin
      int m, n;
      if (first_drain < 0) first_drain = cyc;
      m = int'(d_x) * int'(ctl.na) + int'(d_sel) % int'(ctl.na);
      n = int'(d_y) * int'(ctl.nw) + int'(d_sel) / int'(ctl.na);
      checks++;
      if (m != exp_m || n != exp_n) begin
        failures++;
        if (failures < 10) $display("FAIL drain order got (%0d,%0d) exp (%0d,%0d)", m, n, exp_m, exp_n);
      end
      exp_n++;
      if (exp_n == Y * int'(ctl.nw)) begin exp_n = 0; exp_m++; end
      drained++;
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    cfg.pa = 5'd6; cfg.ea = 4'd3; cfg.pw = 5'd5; cfg.ew = 4'd2; cfg.po = 5'd16; cfg.eo = 4'd5;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
    for (int x = 0; x < X; x++) for (int k = 0; k < K; k++) begin
      checks++; if (a_cnt[x][k] != 1) failures++;
    end
    for (int y = 0; y < Y; y++) for (int k = 0; k < K; k++) begin
      checks++; if (w_cnt[y][k] != 1) failures++;
    end
    checks += 5;
    if (steps != K) failures++;
    if (clears != 1) failures++;
    if (drained != X * 4 * Y * 4) failures++;
    if (last_step - first_step != K - 1) failures++;
    if (first_drain - last_step < 3) failures++;  // two pipeline cycles before the drain
    if (busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
