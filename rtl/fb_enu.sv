// Exponent normalization unit (ENU).
//
// For every product slot it subtracts the accumulator exponent from the
// product exponent and decides which of the two mantissas the concat-shift
// tree must shift right, and by how much. The policy is to shift the value
// with the smaller exponent towards the larger one (one of the policies the
// architecture leaves configurable). A zero operand never sets the scale.
// In integer mode the exponent path is bypassed: no shift, exponent 0.
// Shift amounts saturate at 63. Combinational.
module fb_enu
  import flexibit_pkg::*;
#(
  parameter int unsigned NP = NPROD
) (
  input  logic [PEXPW-1:0] pexp     [NP],
  input  logic             pzero    [NP],
  input  acce_t            acc_exp  [NP],
  input  logic             acc_zero [NP],
  input  logic             int_mode,
  output logic [5:0]       shamt    [NP],
  output logic             shift_prod [NP], // 1: shift product, 0: shift accumulator
  output acce_t            res_exp  [NP]
);
  always_comb begin
    acce_t d;
    for (int unsigned k = 0; k < NP; k++) begin
      d = acce_t'({2'b00, pexp[k]}) - acc_exp[k];
      shamt[k] = '0;
      shift_prod[k] = 1'b0;
      res_exp[k] = acc_exp[k];
      if (int_mode) begin
        res_exp[k] = '0;
      end else if (acc_zero[k]) begin
        res_exp[k] = acce_t'({2'b00, pexp[k]});
      end else if (pzero[k]) begin
        res_exp[k] = acc_exp[k];
      end else if (d >= 0) begin
        res_exp[k] = acce_t'({2'b00, pexp[k]});
        shamt[k]   = (d > 63) ? 6'd63 : d[5:0];
      end else begin
        shift_prod[k] = 1'b1;
        shamt[k]      = (-d > 63) ? 6'd63 : 6'(-d);
      end
    end
  end
endmodule
