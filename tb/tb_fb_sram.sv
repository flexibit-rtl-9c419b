// Testbench: global buffer SRAM. Random writes over the whole address
// range (including the last word), read back with one cycle latency.
module tb_fb_sram;
  localparam int DEPTH = 4096;
  logic clk = 0, we = 0, rd_en = 0;
  logic [11:0] waddr, raddr;
  logic [63:0] wdata, rdata;
  logic [63:0] model [int];
  int checks = 0, failures = 0;

  fb_sram #(.W(64), .DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wdata, .rd_en, .raddr, .rdata);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 500; i++) begin
      int a;
      a = (i == 0) ? DEPTH - 1 : int'($urandom % DEPTH);
      @(negedge clk); we = 1; waddr = 12'(a); wdata = {$urandom, $urandom};
      model[a] = wdata;
    end
    @(negedge clk); we = 0;
    foreach (model[a]) begin
      @(negedge clk); rd_en = 1; raddr = 12'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata != model[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
