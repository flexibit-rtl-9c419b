// Testbench: flexible-bit exponent adder. Random operands are added with
// random segment widths; every segment must equal the modular sum of its
// own operand bits, independent of the neighbouring segments.
module tb_fb_fbea;
  localparam int L = 144;
  logic [L-1:0] a, b, ctrl, sum;
  int checks = 0, failures = 0;

  fb_fbea dut (.a, .b, .ctrl, .sum);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      int sw;
      sw = 2 + int'($urandom % 8);
      for (int i = 0; i < L; i++) begin
        a[i] = $urandom % 2;
        b[i] = $urandom % 2;
        ctrl[i] = ((i + 1) % sw == 0);
      end
      if (t % 7 == 0) begin a = '1; b = '1; end   // worst-case carries
      #1;
      for (int s = 0; s + sw <= L; s += sw) begin
        longint ea, eb, es, got;
        ea = 0; eb = 0; got = 0;
        for (int k = 0; k < sw; k++) begin
          ea |= longint'(a[s+k]) << k;
          eb |= longint'(b[s+k]) << k;
          got |= longint'(sum[s+k]) << k;
        end
        es = (ea + eb) & ((64'sd1 <<< sw) - 1);
        checks++;
        if (got != es) begin
          failures++;
          if (failures < 10) $display("FAIL sw=%0d seg@%0d %0d+%0d got %0d", sw, s, ea, eb, got);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
