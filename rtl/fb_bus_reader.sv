// Bus reader: global buffer to PE bus.
//
// Reads a bit-packed stream from a global buffer, word after word from
// address 0, and hands it out in chunks of chunk_bits bits (the na*pa or
// nw*pw bits of one PE register load) aligned to bit 0 of a REG_W-bit bus
// word. A 128-bit window holds up to two buffer words; a new word is read
// whenever at most 64 bits are left and no read is outstanding. Chunks may
// cross word boundaries. 'start' restarts the stream at address 0.
// Handshake: chunk_valid when a whole chunk is in the window; the consumer
// takes it with take (in the same cycle). Sustains 32 bits per cycle.
module fb_bus_reader
  import flexibit_pkg::*;
#(
  parameter int unsigned W  = 64,
  parameter int unsigned AW = 17
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [5:0]       chunk_bits,
  output logic             chunk_valid,
  output logic [REG_W-1:0] chunk,
  input  logic             take,
  output logic             rd_en,
  output logic [AW-1:0]    rd_addr,
  input  logic [W-1:0]     rd_data
);
  logic [2*W-1:0]    win_q;
  logic [$clog2(2*W):0] cnt_q;
  logic              inflight_q;
  logic [AW-1:0]     addr_q;

  assign chunk_valid = !start && (cnt_q >= ($bits(cnt_q))'(chunk_bits)) && chunk_bits != 0;
  assign chunk = REG_W'(win_q) & REG_W'((25'(1) << chunk_bits) - 25'(1));
  assign rd_en   = !start && !inflight_q && (cnt_q <= ($bits(cnt_q))'(W));
  assign rd_addr = addr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_q <= '0;
      cnt_q <= '0;
      inflight_q <= 1'b0;
      addr_q <= '0;
    end else if (start) begin
      win_q <= '0;
      cnt_q <= '0;
      inflight_q <= 1'b0;
      addr_q <= '0;
    end else begin
      logic [2*W-1:0] w;
      int unsigned    c;
      w = win_q;
      c = 32'(cnt_q);
      if (take && chunk_valid) begin
        w = w >> chunk_bits;
        c = c - 32'(chunk_bits);
      end
      if (inflight_q) begin
        w = w | ((2*W)'(rd_data) << c);
        c = c + W;
      end
      win_q <= w;
      cnt_q <= ($bits(cnt_q))'(c);
      inflight_q <= rd_en;
      if (rd_en) addr_q <= addr_q + 1'b1;
    end
  end
endmodule
