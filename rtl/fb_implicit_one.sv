// Implicit-one correction of the mantissa products.
//
// The reduction tree multiplies only the stored mantissa bits. Since
// (2^ma + A)(2^mw + W) = A*W + (A << mw) + (W << ma) + (1 << (ma+mw)), the
// full significand product is obtained by adding the weight mantissa shifted
// by ma, the activation mantissa shifted by mw and a single one, instead of
// feeding the implicit ones through the tree. Product p pairs activation
// a = p % na with weight w = p / na. In integer mode the raw product passes
// unchanged. Output sig[p] has its binary point at bit ma+mw. Combinational.
module fb_implicit_one
  import flexibit_pkg::*;
#(
  parameter int unsigned RM = R_M,
  parameter int unsigned NP = NPROD
) (
  input  logic [PW-1:0]   prod [NP],
  input  logic [RM-1:0]   act_man,
  input  logic [RM-1:0]   wgt_man,
  input  logic [4:0]      ma,
  input  logic [4:0]      mw,
  input  logic [4:0]      na,
  input  logic [5:0]      nprod,
  input  logic            int_mode,
  output logic [SIGW-1:0] sig [NP]
);
  always_comb begin
    int unsigned a, w;
    logic [SIGW-1:0] am, wm;
    a = 0; w = 0;
    for (int unsigned k = 0; k < NP; k++) begin
      am = SIGW'(RM'(act_man >> (a * 32'(ma))) & RM'((RM'(1) << ma) - RM'(1)));
      wm = SIGW'(RM'(wgt_man >> (w * 32'(mw))) & RM'((RM'(1) << mw) - RM'(1)));
      if (k >= 32'(nprod)) sig[k] = '0;
      else if (int_mode)   sig[k] = SIGW'(prod[k]);
      else sig[k] = SIGW'(prod[k]) + (am << mw) + (wm << ma) + (SIGW'(1) << (ma + mw));
      if (a + 1 < 32'(na)) a++;
      else begin
        a = 0;
        w++;
      end
    end
  end
endmodule
