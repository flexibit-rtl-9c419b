// Flexible-bit reduction tree (FBRT), functional form.
//
// Reduces the packed primitives into the raw mantissa products
// prod[p] = sum_{i<ma, j<mw} prim[p*ma*mw + j*ma + i] << (i+j), i.e. the
// product of the two stored mantissas without their implicit ones. The
// architecture builds this as a fat tree whose switches route, concatenate,
// shift and add primitive segments under compiler-generated switch modes;
// this module computes the same shift-add reduction directly with one
// running-index adder chain per product, which gives the same results for
// every precision pair but not the tree's switch structure. Combinational.
module fb_fbrt
  import flexibit_pkg::*;
#(
  parameter int unsigned L  = L_PRIM,
  parameter int unsigned NP = NPROD,
  parameter int unsigned W  = PW
) (
  input  logic [L-1:0] prim,
  input  logic [4:0]   ma,
  input  logic [4:0]   mw,
  input  logic [5:0]   nprod,
  output logic [W-1:0] prod [NP]
);
  always_comb begin
    int unsigned ab, wb, pidx;
    for (int unsigned k = 0; k < NP; k++) prod[k] = '0;
    ab = 0; wb = 0; pidx = 0;
    if (ma != 0 && mw != 0) begin
      for (int unsigned i = 0; i < L; i++) begin
        if (pidx < 32'(nprod) && pidx < NP && prim[i])
          prod[pidx] = prod[pidx] + (W'(1) << (ab + wb));
        if (ab + 1 < 32'(ma)) ab++;
        else begin
          ab = 0;
          if (wb + 1 < 32'(mw)) wb++;
          else begin
            wb = 0;
            pidx++;
          end
        end
      end
    end
  end
endmodule
