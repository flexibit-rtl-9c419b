// Sign / exponent / mantissa separator.
//
// A REG_W-bit register holds up to n_elem elements of p bits packed back to
// back without padding (element k in bits [k*p +: p]). Inside an element the
// first bit is the sign, the next e bits the exponent and the rest the
// mantissa, as in the separator control algorithm of the architecture. Every
// bit is routed by a small crossbar to the next free position of the sign,
// exponent or mantissa register, so those registers are themselves packed
// (element k's exponent in exp_reg[k*e +: e], mantissa in man_reg[k*m +: m]).
// Unused register bits are zero. Purely combinational; the routing indices
// are running counters, matching the sequential description of the control
// logic. The n_elem limit (so that the packed fields fit R_S/R_E/R_M) comes
// from the control signal generator.
module fb_separator
  import flexibit_pkg::*;
#(
  parameter int unsigned W  = REG_W,
  parameter int unsigned RS = R_S,
  parameter int unsigned RE = R_E,
  parameter int unsigned RM = R_M
) (
  input  logic [W-1:0]  reg_in,
  input  logic [4:0]    p,       // element precision
  input  logic [3:0]    e,       // exponent bits per element
  input  logic [4:0]    n_elem,  // elements to separate
  output logic [RS-1:0] sign_reg,
  output logic [RE-1:0] exp_reg,
  output logic [RM-1:0] man_reg
);
  always_comb begin
    int unsigned bitid, elem, s_idx, e_idx, m_idx;
    sign_reg = '0;
    exp_reg  = '0;
    man_reg  = '0;
    bitid = 0; elem = 0; s_idx = 0; e_idx = 0; m_idx = 0;
    for (int unsigned i = 0; i < W; i++) begin
      if (elem < 32'(n_elem) && p != 0) begin
        if (bitid == 0) begin
          if (s_idx < RS) sign_reg[s_idx] = reg_in[i];
          s_idx++;
        end else if (bitid < 1 + 32'(e)) begin
          if (e_idx < RE) exp_reg[e_idx] = reg_in[i];
          e_idx++;
        end else begin
          if (m_idx < RM) man_reg[m_idx] = reg_in[i];
          m_idx++;
        end
      end
      if (bitid + 1 >= 32'(p)) begin
        bitid = 0;
        elem++;
      end else begin
        bitid++;
      end
    end
  end
endmodule
