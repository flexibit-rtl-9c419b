// End-to-end testbench of the accelerator at its default size.
//
// A host model programs the CSRs, streams zero-padded activations and
// weights through the bit-packing unit into the two global buffers, starts
// a tile and collects the unpacked results from the output stream, with
// random back-pressure. Three tiles are run back to back, switching the
// datapath mode between them: FP6 E3M2 x FP5 E2M2 -> FP16 with K = 30, INT8
// x INT4 -> INT16 (sign-magnitude) with K = 16, and FP8 E4M3 x E4M3 with
// MX shared scales -> FP16 with K = 10. Every output of every tile is
// compared with a real-valued GEMM reference. The test also counts the
// bit-packing flush stall, output back-pressure, each mode and the MX
// scaling, and fails if any of them never happened.
module tb_flexibit_top;
  import tb_ref_pkg::*;
  localparam int X = 8, Y = 8;
  logic clk = 0, rst_n = 0;
  logic csr_we = 0;
  logic [2:0] csr_addr = 0;
  logic [31:0] csr_wdata = 0, csr_rdata;
  logic in_valid = 0, in_ready, in_last = 0;
  logic [63:0] in_data = 0;
  logic out_valid, out_ready = 0, out_last, busy;
  logic [63:0] out_data;
  int checks = 0, failures = 0;
  int n_bpu_stall = 0, n_backpressure = 0, n_fp = 0, n_int = 0, n_mx = 0, n_sat = 0;

  flexibit_top dut (.clk, .rst_n, .csr_we, .csr_addr, .csr_wdata, .csr_rdata, .in_valid, .in_ready,
                    .in_data, .in_last, .out_valid, .out_ready, .out_data, .out_last, .busy);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (!in_ready) n_bpu_stall++;
    if (out_valid && !out_ready) n_backpressure++;
    out_ready <= ($urandom % 4 != 0);
  end

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic csr(input int a, input int d);
    @(negedge clk); csr_we = 1; csr_addr = 3'(a); csr_wdata = d;
    @(negedge clk); csr_we = 0;
  endtask

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

  // send elements through the BPU, 64/C per zero-padded off-chip word
  task automatic send(input bit dst, input int p, ref int q [$]);
    int cw, per;
    cw = (p > 8) ? 16 : 8;
    per = 64 / cw;
    csr(3, int'(dst) | (p << 1) | ((cw == 16) << 6));
    for (int w = 0; w * per < q.size(); w++) begin
      logic [63:0] d;
      d = '0;
      for (int e = 0; e < per; e++)
        if (w * per + e < q.size()) d |= 64'(q[w * per + e]) << (e * cw);
      @(negedge clk);
      in_valid = 1; in_data = d; in_last = ((w + 1) * per >= q.size());
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk);
    in_valid = 0; in_last = 0;
    repeat (2) @(negedge clk);
  endtask

  task automatic run_tile(input bit im, input int pa, input int ea, input int pw, input int ew,
                          input int po, input int eo, input bit mx, input int K,
                          input int na, input int nw,
                          input int alo, input int ahi, input int wlo, input int whi);
    int M, N, sa, sw_;
    int A [][], W [][];
    int aq [$], wq [$];
    int got [$];
    M = X * na; N = Y * nw;
    sa = 125 + int'($urandom % 5); sw_ = 126 + int'($urandom % 4);
    A = new[M]; foreach (A[m]) A[m] = new[K];
    W = new[K]; foreach (W[k]) W[k] = new[N];
    foreach (A[m, k]) A[m][k] = gen(im, pa, ea, alo, ahi);
    foreach (W[k, n]) W[k][n] = gen(im, pw, ew, wlo, whi);
    // packed-buffer order: activation register (row x, step k) holds
    // A[x*na + i][k], i = 0..na-1; weight register (column y, step k) holds
    // W[k][y*nw + j]
    for (int x = 0; x < X; x++) for (int k = 0; k < K; k++) for (int i = 0; i < na; i++)
      aq.push_back(A[x * na + i][k]);
    for (int y = 0; y < Y; y++) for (int k = 0; k < K; k++) for (int j = 0; j < nw; j++)
      wq.push_back(W[k][y * nw + j]);
    csr(0, pa | (ea << 5) | (pw << 9) | (ew << 14) | (po << 18) | (eo << 23) |
           (int'(im) << 27) | (int'(mx) << 28));
    csr(1, sa | (sw_ << 8));
    csr(2, K);
    send(0, pa, aq);
    send(1, pw, wq);
    csr(4, 1);
    // collect the output stream
    begin
      int cw, per;
      bit fin;
      cw = (po > 8) ? 16 : 8;
      per = 64 / cw;
      fin = 0;
      while (!fin) begin
        @(posedge clk);
        if (out_valid && out_ready) begin
          for (int e = 0; e < per; e++) got.push_back(int'((out_data >> (e * cw)) & ((64'd1 << cw) - 1)));
          fin = out_last;
        end
      end
    end
    for (int m = 0; m < M; m++)
      for (int n = 0; n < N; n++) begin
        int expv, g;
        if (im) begin
          longint acc;
          acc = 0;
          for (int k = 0; k < K; k++) acc += longint'(int_decode(A[m][k], pa) * int_decode(W[k][n], pw));
          expv = int_encode(acc, po);
          if (acc > 32767 || acc < -32767) n_sat++;
        end else begin
          real acc;
          acc = 0.0;
          for (int k = 0; k < K; k++) acc += fp_decode(A[m][k], pa, ea) * fp_decode(W[k][n], pw, ew);
          if (mx) acc = acc * pow2(sa - 127 + sw_ - 127);
          expv = fp_encode(acc, po, eo);
        end
        g = (m * N + n < got.size()) ? got[m * N + n] : -1;
        checks++;
        if (g != expv) begin
          failures++;
          if (failures < 10) $display("FAIL tile pa=%0d pw=%0d C[%0d][%0d] got %h exp %h", pa, pw, m, n, g, expv);
        end
      end
    if (im) n_int++; else n_fp++;
    if (mx) n_mx++;
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_tile(0, 6, 3, 5, 2, 16, 5, 0, 30, 4, 4, 0, 7, 0, 3);   // FP6 x FP5
    run_tile(1, 8, 0, 4, 0, 16, 0, 0, 16, 1, 4, 0, 0, 0, 0);   // INT8 x INT4
    run_tile(0, 8, 4, 8, 4, 16, 5, 1, 10, 3, 3, 5, 9, 5, 9);   // FP8 E4M3 with MX
    repeat (3) @(negedge clk);
    csr_addr = 3'd5; #1;
    checks++;
    if (csr_rdata[15:8] != 8'd3) begin failures++; $display("FAIL tile counter %0d", csr_rdata[15:8]); end
    $display("events: bpu_stall=%0d backpressure=%0d fp_tiles=%0d int_tiles=%0d mx_tiles=%0d",
             n_bpu_stall, n_backpressure, n_fp, n_int, n_mx);
    checks += 5;
    if (n_bpu_stall == 0) failures++;
    if (n_backpressure == 0) failures++;
    if (n_fp == 0) failures++;
    if (n_int == 0) failures++;
    if (n_mx == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
