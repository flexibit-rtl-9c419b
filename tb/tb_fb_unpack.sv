// Testbench: unpacking unit. Random output elements of random precision
// are expanded into zero-padded 8/16-bit containers of 64-bit words; the
// words are checked against a reference, with random back-pressure on the
// output and a 'last' element closing a partial word.
module tb_fb_unpack;
  logic clk = 0, rst_n = 0;
  logic [4:0] po;
  logic in_valid = 0, in_ready, in_last = 0, out_valid, out_ready = 0, out_last;
  logic [15:0] in_elem;
  logic [63:0] out_data;
  logic [63:0] expq [$];
  int checks = 0, failures = 0, bp = 0;

  fb_unpack dut (.clk, .rst_n, .po, .in_valid, .in_ready, .in_elem, .in_last,
                 .out_valid, .out_ready, .out_data, .out_last);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (out_valid && !out_ready) bp++;
    if (out_valid && out_ready) begin
      logic [63:0] e;
      e = expq.pop_front();
      checks++;
      if (out_data != e) begin
        failures++;
        if (failures < 10) $display("FAIL got %h exp %h", out_data, e);
      end
    end
    out_ready <= ($urandom % 3 != 0);
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      int p, cw, n;
      logic [63:0] w;
      p = 3 + int'($urandom % 14);
      cw = (p > 8) ? 16 : 8;
      n = 1 + int'($urandom % 20);
      po = 5'(p);
      w = '0;
      for (int i = 0; i < n; i++) begin
        logic [15:0] v;
        v = 16'($urandom);
        w |= 64'(v & 16'((1 << p) - 1)) << ((i % (64 / cw)) * cw);
        if ((i % (64 / cw)) == 64 / cw - 1 || i == n - 1) begin
          expq.push_back(w);
          w = '0;
        end
        @(negedge clk);
        in_valid = 1; in_elem = v; in_last = (i == n - 1);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk);
        in_valid = 0;
      end
      while (expq.size() != 0) @(posedge clk);
    end
    checks++;
    if (bp == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
