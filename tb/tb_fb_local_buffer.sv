// Testbench: PE local buffer. Fills both operand memories (in the same
// cycles, at different addresses), then reads every entry back and checks
// the one-cycle registered read latency.
module tb_fb_local_buffer;
  logic clk = 0, we_a = 0, we_w = 0, rd_en = 0;
  logic [4:0] waddr_a, waddr_w, raddr;
  logic [23:0] wdata_a, wdata_w, act_q, wgt_q;
  logic [23:0] ra [30], rw [30];
  int checks = 0, failures = 0;

  fb_local_buffer dut (.clk, .we_a, .we_w, .waddr_a, .wdata_a, .waddr_w, .wdata_w,
                       .rd_en, .raddr, .act_q, .wgt_q);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 30; i++) begin
      ra[i] = 24'($urandom); rw[29-i] = 24'($urandom);
      @(negedge clk);
      we_a = 1; waddr_a = 5'(i); wdata_a = ra[i];
      we_w = 1; waddr_w = 5'(29 - i); wdata_w = rw[29-i];
    end
    @(negedge clk); we_a = 0; we_w = 0;
    for (int i = 0; i < 30; i++) begin
      @(negedge clk); rd_en = 1; raddr = 5'(i);
      @(posedge clk); #1;
      checks += 2;
      if (act_q != ra[i]) failures++;
      if (wgt_q != rw[i]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
