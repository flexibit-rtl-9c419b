// Testbench: bit-packing unit. Streams of zero-padded elements (8-bit
// containers for precisions 3..8, 16-bit containers for 9..16) are packed;
// the words written to the buffer must equal the elements concatenated
// back to back in a reference bit stream, including the flushed last
// word, and the element count must match. A 'last' that leaves two words
// to write must drop in_ready for one cycle.
module tb_fb_bpu;
  logic clk = 0, rst_n = 0, restart = 0, cont16 = 0;
  logic [4:0] prec;
  logic in_valid = 0, in_ready, in_last = 0, wr_en;
  logic [63:0] in_data, wr_data;
  logic [17:0] wr_addr;
  logic [31:0] elem_count;
  logic [63:0] got [int];
  int checks = 0, failures = 0, stalls = 0;

  fb_bpu dut (.clk, .rst_n, .restart, .prec, .cont16, .in_valid, .in_ready, .in_data, .in_last,
              .wr_en, .wr_addr, .wr_data, .elem_count);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (wr_en) got[int'(wr_addr)] = wr_data;
    if (!in_ready) stalls++;
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
    for (int t = 0; t < 30; t++) begin
      int p, cw, nw, nbits;
      bit stream [$];
      p = 3 + int'($urandom % 14);
      cw = (p > 8) ? 16 : 8;
      nw = 1 + int'($urandom % 12);
      got.delete();
      stream.delete();
      @(negedge clk);
      prec = 5'(p); cont16 = (cw == 16); restart = 1;
      @(negedge clk); restart = 0;
      for (int w = 0; w < nw; w++) begin
        logic [63:0] d;
        d = '0;
        for (int e = 0; e < 64 / cw; e++) begin
          int v;
          v = int'($urandom) & ((1 << p) - 1);
          for (int b = 0; b < p; b++) begin
            d[e*cw + b] = v[b];
            stream.push_back(v[b]);
          end
        end
        in_valid = 1; in_data = d; in_last = (w == nw - 1);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        #1;
      end
      in_valid = 0; in_last = 0;
      repeat (3) @(posedge clk);
      nbits = stream.size();
      checks++;
      if (got.num() != (nbits + 63) / 64) begin
        failures++;
        $display("FAIL p=%0d words %0d exp %0d", p, got.num(), (nbits + 63) / 64);
      end
      for (int w = 0; w < (nbits + 63) / 64; w++) begin
        logic [63:0] e;
        e = '0;
        for (int b = 0; b < 64 && w*64 + b < nbits; b++) e[b] = stream[w*64 + b];
        checks++;
        if (!got.exists(w) || got[w] != e) begin
          failures++;
          if (failures < 10) $display("FAIL p=%0d word %0d", p, w);
        end
      end
      checks++;
      if (int'(elem_count) != nw * (64 / cw)) failures++;
    end
    checks++;
    if (stalls == 0) begin
      failures++;
      $display("FAIL: the double-buffer flush stall never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
