// Testbench: CSRs. Writes every register, checks the decoded configuration
// fields, the one-cycle start and BPU-restart pulses, read-back, and the
// status register (busy, completed-tile counter, BPU element count).
module tb_fb_csr;
  import flexibit_pkg::*;
  logic clk = 0, rst_n = 0, we = 0, busy = 0, tile_done = 0;
  logic [2:0]  addr = 0;
  logic [31:0] wdata, rdata, bpu_elems = 32'd77;
  fb_cfg_t cfg;
  logic [4:0] tile_k, load_prec;
  logic load_dst, load_cont16, bpu_restart, start;
  int checks = 0, failures = 0;

  fb_csr dut (.clk, .rst_n, .we, .addr, .wdata, .rdata, .busy, .tile_done, .bpu_elems, .cfg,
              .tile_k, .load_dst, .load_prec, .load_cont16, .bpu_restart, .start);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int a, input int d);
    @(negedge clk); we = 1; addr = 3'(a); wdata = d;
    @(negedge clk); we = 0;
  endtask

  task automatic ck(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    ck(cfg.pa == 16 && cfg.ea == 5 && tile_k == 1, "reset values");
    wr(0, 6 | (3 << 5) | (5 << 9) | (2 << 14) | (16 << 18) | (5 << 23) | (1 << 28));
    ck(cfg.pa == 6 && cfg.ea == 3 && cfg.pw == 5 && cfg.ew == 2 && cfg.po == 16 && cfg.eo == 5, "format");
    ck(cfg.mx_en && !cfg.int_mode, "mode bits");
    wr(1, 130 | (125 << 8));
    ck(cfg.scale_a == 130 && cfg.scale_w == 125, "scales");
    wr(2, 17);
    ck(tile_k == 17, "tile k");
    @(negedge clk); we = 1; addr = 3'd3; wdata = 1 | (6 << 1);
    @(posedge clk); #1; we = 0;
    ck(bpu_restart && load_dst && load_prec == 6 && !load_cont16, "load register and restart pulse");
    @(posedge clk); #1;
    ck(!bpu_restart, "restart is a pulse");
    @(negedge clk); we = 1; addr = 3'd4; wdata = 1;
    @(posedge clk); #1; we = 0;
    ck(start, "start pulse");
    @(posedge clk); #1;
    ck(!start, "start is a pulse");
    addr = 3'd2; #1;
    ck(rdata == 17, "read back");
    busy = 1; tile_done = 1;
    @(posedge clk); #1; tile_done = 0;
    addr = 3'd5; #1;
    ck(rdata == {16'd77, 8'd1, 7'd0, 1'b1}, "status");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
