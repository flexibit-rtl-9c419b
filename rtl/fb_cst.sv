// Concat-shift tree (CST), functional form.
//
// Places every product significand (binary point at bit ma+mw) on the
// accumulator's fixed-point grid (leading one at ACC_LEAD) and then shifts
// either the product or the accumulator mantissa right by the ENU shift
// amount, so both have the same scale. The architecture does this in a tree
// that concatenates the bit-packed mantissas and applies the per-mantissa
// shift at each level; this module applies the same per-mantissa shifts
// directly. Zero products become 0; in integer mode nothing is shifted.
// Combinational.
module fb_cst
  import flexibit_pkg::*;
#(
  parameter int unsigned NP = NPROD
) (
  input  logic [SIGW-1:0] psig       [NP],
  input  logic            pzero      [NP],
  input  accm_t           acc_m      [NP],
  input  logic [5:0]      shamt      [NP],
  input  logic            shift_prod [NP],
  input  logic [5:0]      mm,          // ma + mw
  input  logic            int_mode,
  output accm_t           p_al       [NP],
  output accm_t           a_al       [NP]
);
  always_comb begin
    accm_t pp;
    for (int unsigned k = 0; k < NP; k++) begin
      if (pzero[k])     pp = '0;
      else if (int_mode) pp = ACCW'(psig[k]);
      else               pp = ACCW'(psig[k]) << (6'(ACC_LEAD) - mm);
      p_al[k] = (shift_prod[k])  ? pp >> shamt[k] : pp;
      a_al[k] = (!shift_prod[k]) ? acc_m[k] >> shamt[k] : acc_m[k];
    end
  end
endmodule
