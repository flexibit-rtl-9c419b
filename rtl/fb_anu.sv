// Accumulation and normalization unit (ANU).
//
// Holds NP accumulators in sign-magnitude form (sign, signed exponent,
// ACCW-bit magnitude). On each enabled step it adds the aligned product and
// accumulator magnitudes (or subtracts the smaller from the larger when the
// signs differ), then renormalizes: the leading one is moved to bit ACC_LEAD
// and the exponent adjusted by the same amount; bits shifted out are
// truncated. A zero sum clears the accumulator. In integer mode the sum is
// kept as an integer magnitude (saturating) with no renormalization.
// 'clear' (first step of a tile) makes the accumulator read as zero; the
// acc_* outputs already include that, so the ENU and CST see zero.
// Timing: one accumulation per clock; result visible the next cycle.
module fb_anu
  import flexibit_pkg::*;
#(
  parameter int unsigned NP = NPROD
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   en,
  input  logic   clear,
  input  logic   int_mode,
  input  logic [5:0] nprod,
  input  logic   psign   [NP],
  input  accm_t  p_al    [NP],
  input  accm_t  a_al    [NP],
  input  acce_t  res_exp [NP],
  output logic   acc_s   [NP],
  output acce_t  acc_e   [NP],
  output accm_t  acc_m   [NP],
  output logic   acc_zero[NP]
);
  logic  s_q [NP];
  acce_t e_q [NP];
  accm_t m_q [NP];

  for (genvar k = 0; k < NP; k++) begin : g_slot
    logic [ACCW:0] sum;
    logic          sgn;
    logic [5:0]    lead;
    logic          upd;
    logic          n_s;
    acce_t         n_e;
    accm_t         n_m;

    assign acc_s[k]    = clear ? 1'b0 : s_q[k];
    assign acc_e[k]    = clear ? '0   : e_q[k];
    assign acc_m[k]    = clear ? '0   : m_q[k];
    assign acc_zero[k] = (acc_m[k] == '0);
    assign upd = en && (k < 32'(nprod));

    // signed-magnitude add of the aligned magnitudes
    always_comb begin
      if (psign[k] == acc_s[k] || a_al[k] == '0) begin
        sum = {1'b0, p_al[k]} + {1'b0, a_al[k]};
        sgn = (a_al[k] == '0) ? psign[k] : acc_s[k];
      end else if (p_al[k] > a_al[k]) begin
        sum = {1'b0, p_al[k] - a_al[k]};
        sgn = psign[k];
      end else begin
        sum = {1'b0, a_al[k] - p_al[k]};
        sgn = acc_s[k];
      end
    end

    // leading-one detector
    always_comb begin
      lead = '0;
      for (int b = 0; b <= ACCW; b++) if (sum[b]) lead = 6'(b);
    end

    // renormalization (FP) or saturation (INT)
    always_comb begin
      n_s = sgn;
      n_e = res_exp[k] + acce_t'(signed'({1'b0, lead}) - 7'sd30);
      if (lead >= 6'(ACC_LEAD)) n_m = ACCW'(sum >> (lead - 6'(ACC_LEAD)));
      else                      n_m = ACCW'(sum << (6'(ACC_LEAD) - lead));
      if (sum == '0) begin
        n_s = 1'b0;
        n_e = '0;
        n_m = '0;
      end else if (int_mode) begin
        n_e = '0;
        n_m = sum[ACCW] ? '1 : sum[ACCW-1:0];
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        s_q[k] <= 1'b0;
        e_q[k] <= '0;
        m_q[k] <= '0;
      end else if (upd) begin
        s_q[k] <= n_s;
        e_q[k] <= n_e;
        m_q[k] <= n_m;
      end
    end
  end
endmodule
