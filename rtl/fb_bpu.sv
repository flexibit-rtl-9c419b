// Bit-packing unit (BPU).
//
// Off-chip data arrive as 64-bit words of zero-padded elements: 8-bit
// containers (16-bit when cont16 is set) each holding one element of prec
// bits in its low bits. A crossbar maps the useful input bit i to output bit
// j = start_idx + i - floor(i/C)*(C - prec), C the container width, so the
// elements end up back to back without padding; start_idx then advances by
// prec*(64/C). The crossbar writes into a 128-bit double buffer: once 64
// packed bits are present the lower half is written to the global buffer at
// the next word address and the upper half moves down. 'last' flushes a
// partially filled word. 'restart' resets start_idx, the word address and
// the element count (metadata for the controller: words and elements
// written).
// Timing: one input word per cycle; in_ready drops for one cycle only when
// a 'last' word leaves two words to write.
module fb_bpu #(
  parameter int unsigned IN_W = 64,
  parameter int unsigned AW   = 18
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            restart,
  input  logic [4:0]      prec,
  input  logic            cont16,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [IN_W-1:0] in_data,
  input  logic            in_last,
  output logic            wr_en,
  output logic [AW-1:0]   wr_addr,
  output logic [IN_W-1:0] wr_data,
  output logic [31:0]     elem_count
);
  logic [2*IN_W-1:0] stage_q;
  logic [$clog2(IN_W):0] fill_q;   // start_idx inside the double buffer
  logic              flush_q;
  logic [AW-1:0]     addr_q;

  logic [2*IN_W-1:0] packed_in;
  int unsigned       n_bits, cw;

  always_comb begin
    int unsigned j;
    cw = cont16 ? 16 : 8;
    n_bits = 32'(prec) * (IN_W / cw);
    packed_in = '0;
    j = 0;
    for (int unsigned i = 0; i < IN_W; i++) begin
      if ((i % cw) < 32'(prec)) begin
        j = 32'(fill_q) + i - (i / cw) * (cw - 32'(prec));
        if (j < 2 * IN_W) packed_in[j] = in_data[i];
      end
    end
  end

  assign in_ready = !flush_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stage_q <= '0;
      fill_q  <= '0;
      flush_q <= 1'b0;
      addr_q  <= '0;
      wr_en   <= 1'b0;
      wr_addr <= '0;
      wr_data <= '0;
      elem_count <= '0;
    end else begin
      logic [2*IN_W-1:0] st;
      int unsigned       f;
      wr_en <= 1'b0;
      if (restart) begin
        stage_q <= '0;
        fill_q  <= '0;
        flush_q <= 1'b0;
        addr_q  <= '0;
        elem_count <= '0;
      end else if (flush_q) begin
        wr_en   <= 1'b1;
        wr_addr <= addr_q;
        wr_data <= stage_q[IN_W-1:0];
        addr_q  <= addr_q + 1'b1;
        stage_q <= '0;
        fill_q  <= '0;
        flush_q <= 1'b0;
      end else if (in_valid) begin
        st = (stage_q & ((2*IN_W)'(1) << fill_q) - 1'b1) | packed_in;
        f  = 32'(fill_q) + n_bits;
        elem_count <= elem_count + IN_W / cw;
        if (f >= IN_W) begin
          wr_en   <= 1'b1;
          wr_addr <= addr_q;
          wr_data <= st[IN_W-1:0];
          addr_q  <= addr_q + 1'b1;
          st = st >> IN_W;
          f  = f - IN_W;
        end
        stage_q <= st;
        fill_q  <= ($bits(fill_q))'(f);
        if (in_last && f != 0) begin
          if (f >= IN_W || 32'(fill_q) + n_bits >= IN_W) begin
            flush_q <= 1'b1;
          end else begin
            wr_en   <= 1'b1;
            wr_addr <= addr_q;
            wr_data <= st[IN_W-1:0];
            addr_q  <= addr_q + 1'b1;
            stage_q <= '0;
            fill_q  <= '0;
          end
        end
      end
    end
  end
endmodule
