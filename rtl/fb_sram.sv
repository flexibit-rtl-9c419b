// Global buffer SRAM.
//
// A single-clock memory of DEPTH words of W bits with one write port and one
// read port; read data is registered (available the cycle after rd_en).
// Used for the weight global buffer and the activation/output global buffer,
// which hold data in the bit-packed layout produced by the bit-packing unit.
// Written as an array so that it maps onto an SRAM macro in a real flow.
module fb_sram #(
  parameter int unsigned W     = 64,
  parameter int unsigned DEPTH = 131072,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          rd_en,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (rd_en) rdata <= mem[raddr];
  end
endmodule
