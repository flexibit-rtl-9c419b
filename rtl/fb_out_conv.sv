// Output conversion with MX shared scales.
//
// Converts one accumulator (sign, exponent, magnitude with its leading one
// at ACC_LEAD) into an element of the target output format: po bits laid
// out LSB first as sign, eo exponent bits, mo mantissa bits. The output
// exponent is the accumulator exponent minus the activation and weight
// biases plus the output bias; with MX enabled the two shared E8M0 scales
// held in the PE (scale_a, scale_w, bias 127 each) are added as well.
// Mantissa bits below the output precision are truncated; an exponent below
// zero flushes to zero, above the maximum saturates to the largest value.
// In integer mode the magnitude is saturated to po-1 bits. Combinational.
module fb_out_conv
  import flexibit_pkg::*;
(
  input  logic            acc_s,
  input  acce_t           acc_e,
  input  accm_t           acc_m,
  input  logic            int_mode,
  input  logic            mx_en,
  input  logic [3:0]      ea,
  input  logic [3:0]      ew,
  input  logic [4:0]      po,
  input  logic [3:0]      eo,
  input  logic [4:0]      mo,
  input  logic [7:0]      scale_a,
  input  logic [7:0]      scale_w,
  output logic [OUTW-1:0] elem
);
  function automatic int bias(input logic [3:0] e);
    return (e == 0) ? 0 : (1 << (e - 1)) - 1;
  endfunction

  always_comb begin
    int      ev, emax;
    accm_t   mag, mmax, man;
    elem = '0;
    ev = 0; emax = 0; mag = '0; mmax = '0; man = '0;
    if (int_mode) begin
      mmax = (ACCW'(1) << (po - 5'd1)) - ACCW'(1);
      mag  = (acc_m > mmax) ? mmax : acc_m;
      elem = OUTW'({mag, acc_s});
      if (acc_m == '0) elem = '0;
    end else if (acc_m != '0) begin
      ev = int'(acc_e) - bias(ea) - bias(ew) + bias(eo);
      if (mx_en) ev = ev + int'(scale_a) - 127 + int'(scale_w) - 127;
      emax = (1 << eo) - 1;
      man  = (acc_m >> (6'(ACC_LEAD) - 6'(mo))) & ((ACCW'(1) << mo) - ACCW'(1));
      if (ev > emax) begin
        ev  = emax;
        man = (ACCW'(1) << mo) - ACCW'(1);
      end
      if (ev >= 0) begin
        elem = OUTW'(acc_s) | (OUTW'(ev & emax) << 1) | OUTW'(man << (eo + 4'd1));
      end
    end
  end
endmodule
