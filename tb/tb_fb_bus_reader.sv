// Testbench: bus reader. A behavioural buffer model with one-cycle read
// latency holds a random bit stream; chunks of random sizes (up to 24 bits)
// are taken with random gaps and must equal consecutive slices of the
// stream, including slices that cross 64-bit word boundaries.
module tb_fb_bus_reader;
  logic clk = 0, rst_n = 0, start = 0, take = 0, chunk_valid, rd_en;
  logic [5:0]  chunk_bits;
  logic [23:0] chunk;
  logic [9:0]  rd_addr;
  logic [63:0] rd_data;
  logic [63:0] mem [1024];
  int checks = 0, failures = 0, crossings = 0;

  fb_bus_reader #(.AW(10)) dut (.clk, .rst_n, .start, .chunk_bits, .chunk_valid, .chunk, .take,
                                .rd_en, .rd_addr, .rd_data);
  always #5 clk = ~clk;
  always @(posedge clk) if (rd_en) rd_data <= mem[rd_addr];

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pos;
    for (int i = 0; i < 1024; i++) mem[i] = {$urandom, $urandom};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      int cb;
      cb = (t == 0) ? 20 : (t == 1) ? 24 : 15;
      @(negedge clk); start = 1; chunk_bits = 6'(cb);
      @(negedge clk); start = 0;
      pos = 0;
      for (int n = 0; n < 300; n++) begin
        logic [23:0] e;
        while (!chunk_valid) @(negedge clk);
        e = '0;
        for (int b = 0; b < cb; b++) e[b] = mem[(pos + b) / 64][(pos + b) % 64];
        if ((pos % 64) + cb > 64) crossings++;
        checks++;
        if (chunk != e) begin
          failures++;
          if (failures < 10) $display("FAIL pos=%0d got %h exp %h", pos, chunk, e);
        end
        take = 1;
        @(negedge clk);
        take = 0;
        pos += cb;
        if ($urandom % 4 == 0) @(negedge clk);
      end
    end
    checks++;
    if (crossings == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
