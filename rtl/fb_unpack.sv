// Unpacking unit.
//
// The reverse of the bit-packing unit for data leaving the chip: output
// elements of po bits arrive one per handshake and are placed, zero-padded,
// into 8-bit containers (16-bit when po > 8) of a 64-bit off-chip word,
// element n of a word in container n. A word is sent when all its containers
// are filled or when an element is marked last (the rest stays zero).
// Timing: the word register is a one-entry buffer; in_ready is low while a
// finished word waits for out_ready.
module fb_unpack #(
  parameter int unsigned OUT_W = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [4:0]       po,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [15:0]      in_elem,
  input  logic             in_last,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [OUT_W-1:0] out_data,
  output logic             out_last
);
  logic [OUT_W-1:0] word_q;
  logic [3:0]       slot_q;
  int unsigned      cw, slots;
  logic [15:0]      masked;

  always_comb begin
    cw     = (po > 5'd8) ? 16 : 8;
    slots  = OUT_W / cw;
    masked = in_elem & 16'((17'(1) << po) - 17'(1));
  end

  assign in_ready = !out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word_q    <= '0;
      slot_q    <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        logic [OUT_W-1:0] w;
        w = word_q | (OUT_W'(masked) << (32'(slot_q) * cw));
        if (32'(slot_q) + 1 == slots || in_last) begin
          out_valid <= 1'b1;
          out_data  <= w;
          out_last  <= in_last;
          word_q    <= '0;
          slot_q    <= '0;
        end else begin
          word_q <= w;
          slot_q <= slot_q + 1'b1;
        end
      end
    end
  end
endmodule
