// PE local buffer.
//
// Stores the activation and weight registers of one compute tile: DEPTH
// entries of REG_W bits for each operand, 2*30*24 = 1440 bits, which is
// within the 0.18 KB local buffer per PE. One write port per operand (filled
// over the row and column buses, which may write in the same cycle) and a shared read address; the read data is
// registered, i.e. it appears one cycle after rd_en.
module fb_local_buffer
  import flexibit_pkg::*;
#(
  parameter int unsigned DEPTH = 30,
  parameter int unsigned W     = REG_W,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we_a,
  input  logic          we_w,
  input  logic [AW-1:0] waddr_a,
  input  logic [W-1:0]  wdata_a,
  input  logic [AW-1:0] waddr_w,
  input  logic [W-1:0]  wdata_w,
  input  logic          rd_en,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  act_q,
  output logic [W-1:0]  wgt_q
);
  logic [W-1:0] act_mem [DEPTH];
  logic [W-1:0] wgt_mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we_a && 32'(waddr_a) < DEPTH) act_mem[waddr_a] <= wdata_a;
    if (we_w && 32'(waddr_w) < DEPTH) wgt_mem[waddr_w] <= wdata_w;
    if (rd_en && 32'(raddr) < DEPTH) begin
      act_q <= act_mem[raddr];
      wgt_q <= wgt_mem[raddr];
    end
  end
endmodule
