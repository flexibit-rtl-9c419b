// Primitive generator.
//
// Produces the primitives P(i,j) = A_i & W_j of every activation/weight
// mantissa pair in the order the reduction tree expects: products one after
// the other (product p = w*na + a, i.e. an outer product of the na
// activations and nw weights), and inside a product the activation bit index
// running fastest: prim[p*ma*mw + j*ma + i] = act_man[a*ma+i] & wgt_man[w*mw+j].
// Two crossbars select the operand bits; here they are written as running
// index counters over the L bits of the primitive register. Positions beyond
// nprod*ma*mw are zero. Combinational.
module fb_prim_gen
  import flexibit_pkg::*;
#(
  parameter int unsigned RM = R_M,
  parameter int unsigned L  = L_PRIM
) (
  input  logic [RM-1:0] act_man,
  input  logic [RM-1:0] wgt_man,
  input  logic [4:0]    ma,
  input  logic [4:0]    mw,
  input  logic [4:0]    na,
  input  logic [5:0]    nprod,
  output logic [L-1:0]  prim
);
  always_comb begin
    int unsigned ab, wb, a, w, pidx, ai, wi;
    prim = '0;
    ai = 0; wi = 0;
    ab = 0; wb = 0; a = 0; w = 0; pidx = 0;
    if (ma != 0 && mw != 0) begin
      for (int unsigned i = 0; i < L; i++) begin
        if (pidx < 32'(nprod)) begin
          ai = a * 32'(ma) + ab;
          wi = w * 32'(mw) + wb;
          if (ai < RM && wi < RM) prim[i] = act_man[ai] & wgt_man[wi];
        end
        // advance: act bit, then weight bit, then next product
        if (ab + 1 < 32'(ma)) ab++;
        else begin
          ab = 0;
          if (wb + 1 < 32'(mw)) wb++;
          else begin
            wb = 0;
            pidx++;
            if (a + 1 < 32'(na)) a++;
            else begin
              a = 0;
              w++;
            end
          end
        end
      end
    end
  end
endmodule
