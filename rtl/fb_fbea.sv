// Flexible-bit exponent adder (FBEA).
//
// An L-bit ripple-carry adder with a multiplexer between neighbouring full
// adders: ctrl[i] = 1 stops the carry out of bit i, so the adder splits into
// independent segments and adds many short or few long operands at once.
// The control vector is generated per layer (a 1 at the top bit of every
// segment). Combinational.
module fb_fbea
  import flexibit_pkg::*;
#(
  parameter int unsigned L = L_ADD
) (
  input  logic [L-1:0] a,
  input  logic [L-1:0] b,
  input  logic [L-1:0] ctrl,
  output logic [L-1:0] sum
);
  always_comb begin
    logic c;
    c = 1'b0;
    for (int unsigned i = 0; i < L; i++) begin
      sum[i] = a[i] ^ b[i] ^ c;
      c      = ctrl[i] ? 1'b0 : ((a[i] & b[i]) | (c & (a[i] ^ b[i])));
    end
  end
endmodule
