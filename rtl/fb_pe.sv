// FlexiBit processing element.
//
// Multiplies up to NPROD activation/weight pairs per cycle in any FP or INT
// format and accumulates each product into its own accumulator (outer
// product: na activations of one register times nw weights of the other
// give na*nw partial outputs of a C tile; product p = w*na + a).
//
// Datapath, one tile step per clock:
//  local buffer -> act/weight registers -> separator (sign/exp/mantissa)
//   - mantissas: primitive generator -> FBRT -> implicit-one correction
//   - exponents: operand crossbar -> flexible-bit exponent adder (FBEA)
//   - signs: XOR per product
//  -> ENU (exponent difference to the accumulator) -> concat-shift tree
//  -> ANU (add, renormalize, store).
// In integer mode the exponent path (FBEA, ENU shifts) is bypassed.
// The output of accumulator out_sel is converted to the output format with
// the MX shared scales held in two PE registers.
//
// Timing: a step issued with step/step_addr reads the local buffer in that
// cycle, the registers hold the operands in the next cycle, and the
// accumulators are updated at the end of it, so a tile of K steps issued
// back to back is complete two cycles after the last step. step_clear marks
// the first step of a tile (accumulators restart from zero). scale_ld loads
// the two MX scale registers.
module fb_pe
  import flexibit_pkg::*;
#(
  parameter int unsigned LB_DEPTH = 30,
  localparam int unsigned AW = $clog2(LB_DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  fb_cfg_t         cfg,
  input  fb_ctl_t         ctl,
  // local buffer fill (row bus / column bus)
  input  logic            we_a,
  input  logic            we_w,
  input  logic [AW-1:0]   waddr_a,
  input  logic [REG_W-1:0] wdata_a,
  input  logic [AW-1:0]   waddr_w,
  input  logic [REG_W-1:0] wdata_w,
  // compute
  input  logic            step,
  input  logic            step_clear,
  input  logic [AW-1:0]   step_addr,
  input  logic            scale_ld,
  // drain
  input  logic [5:0]      out_sel,
  output logic [OUTW-1:0] out_elem
);
  localparam int unsigned NP = NPROD;

  logic [REG_W-1:0] act_reg, wgt_reg;
  logic             v1, c1;
  logic [7:0]       scale_a_q, scale_w_q;

  fb_local_buffer #(.DEPTH(LB_DEPTH)) u_lb (
    .clk, .we_a, .we_w, .waddr_a, .wdata_a, .waddr_w, .wdata_w,
    .rd_en(step), .raddr(step_addr), .act_q(act_reg), .wgt_q(wgt_reg)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      c1 <= 1'b0;
      scale_a_q <= 8'd127;
      scale_w_q <= 8'd127;
    end else begin
      v1 <= step;
      c1 <= step & step_clear;
      if (scale_ld) begin
        scale_a_q <= cfg.scale_a;
        scale_w_q <= cfg.scale_w;
      end
    end
  end

  // ---------------- separator ----------------
  logic [3:0]    ea_eff, ew_eff;
  logic [R_S-1:0] a_sign, w_sign;
  logic [R_E-1:0] a_exp,  w_exp;
  logic [R_M-1:0] a_man,  w_man;
  assign ea_eff = cfg.int_mode ? 4'd0 : cfg.ea;
  assign ew_eff = cfg.int_mode ? 4'd0 : cfg.ew;

  fb_separator u_sep_a (.reg_in(act_reg), .p(cfg.pa), .e(ea_eff), .n_elem(ctl.na),
                        .sign_reg(a_sign), .exp_reg(a_exp), .man_reg(a_man));
  fb_separator u_sep_w (.reg_in(wgt_reg), .p(cfg.pw), .e(ew_eff), .n_elem(ctl.nw),
                        .sign_reg(w_sign), .exp_reg(w_exp), .man_reg(w_man));

  // ---------------- mantissa path ----------------
  logic [L_PRIM-1:0] prim;
  prod_t             prod [NP];
  sig_t              psig [NP];

  fb_prim_gen u_pg (.act_man(a_man), .wgt_man(w_man), .ma(ctl.ma), .mw(ctl.mw),
                    .na(ctl.na), .nprod(ctl.nprod), .prim);
  fb_fbrt u_fbrt (.prim, .ma(ctl.ma), .mw(ctl.mw), .nprod(ctl.nprod), .prod);
  fb_implicit_one u_i1 (.prod, .act_man(a_man), .wgt_man(w_man), .ma(ctl.ma), .mw(ctl.mw),
                        .na(ctl.na), .nprod(ctl.nprod), .int_mode(cfg.int_mode), .sig(psig));

  // ---------------- exponent / sign / zero crossbar ----------------
  logic [L_ADD-1:0] fa, fb, fsum;
  logic             psign [NP];
  logic             pzero [NP];
  logic [PEXPW-1:0] pexp  [NP];

  always_comb begin
    int unsigned a, w, base;
    logic [R_E-1:0] ae, we;
    logic [R_M-1:0] am, wm;
    fa = '0;
    fb = '0;
    a = 0; w = 0;
    for (int unsigned k = 0; k < NP; k++) begin
      ae = (a_exp >> (a * 32'(ea_eff))) & ((R_E'(1) << ea_eff) - R_E'(1));
      we = (w_exp >> (w * 32'(ew_eff))) & ((R_E'(1) << ew_eff) - R_E'(1));
      am = (a_man >> (a * 32'(ctl.ma))) & ((R_M'(1) << ctl.ma) - R_M'(1));
      wm = (w_man >> (w * 32'(ctl.mw))) & ((R_M'(1) << ctl.mw) - R_M'(1));
      psign[k] = a_sign[a % R_S] ^ w_sign[w % R_S];
      pzero[k] = (k >= 32'(ctl.nprod)) || (ae == '0 && am == '0) || (we == '0 && wm == '0);
      base = k * 32'(ctl.sw);
      for (int unsigned b = 0; b < 12; b++) begin
        if (b < 32'(ctl.sw) && base + b < L_ADD && !cfg.int_mode) begin
          fa[base + b] = (b < R_E) ? ae[b] : 1'b0;
          fb[base + b] = (b < R_E) ? we[b] : 1'b0;
        end
      end
      if (a + 1 < 32'(ctl.na)) a++;
      else begin
        a = 0;
        w++;
      end
    end
  end

  fb_fbea u_fbea (.a(fa), .b(fb), .ctrl(ctl.fbea_ctrl), .sum(fsum));

  always_comb begin
    int unsigned base;
    for (int unsigned k = 0; k < NP; k++) begin
      pexp[k] = '0;
      base = k * 32'(ctl.sw);
      for (int unsigned b = 0; b < PEXPW; b++)
        if (b < 32'(ctl.sw) && base + b < L_ADD) pexp[k][b] = fsum[base + b];
    end
  end

  // ---------------- alignment and accumulation ----------------
  logic  acc_s [NP], acc_zero [NP], shift_prod [NP];
  acce_t acc_e [NP], res_exp [NP];
  accm_t acc_m [NP], p_al [NP], a_al [NP];
  logic [5:0] shamt [NP];

  fb_enu u_enu (.pexp, .pzero, .acc_exp(acc_e), .acc_zero, .int_mode(cfg.int_mode),
                .shamt, .shift_prod, .res_exp);
  fb_cst u_cst (.psig, .pzero, .acc_m, .shamt, .shift_prod,
                .mm(6'(ctl.ma) + 6'(ctl.mw)), .int_mode(cfg.int_mode), .p_al, .a_al);
  fb_anu u_anu (.clk, .rst_n, .en(v1), .clear(c1), .int_mode(cfg.int_mode), .nprod(ctl.nprod),
                .psign, .p_al, .a_al, .res_exp, .acc_s, .acc_e, .acc_m, .acc_zero);

  // ---------------- output ----------------
  logic  o_s;
  acce_t o_e;
  accm_t o_m;
  always_comb begin
    o_s = 1'b0; o_e = '0; o_m = '0;
    for (int unsigned k = 0; k < NP; k++)
      if (32'(out_sel) == k) begin
        o_s = acc_s[k]; o_e = acc_e[k]; o_m = acc_m[k];
      end
  end

  fb_out_conv u_oc (.acc_s(o_s), .acc_e(o_e), .acc_m(o_m), .int_mode(cfg.int_mode),
                    .mx_en(cfg.mx_en), .ea(ea_eff), .ew(ew_eff), .po(cfg.po), .eo(cfg.eo),
                    .mo(ctl.mo), .scale_a(scale_a_q), .scale_w(scale_w_q), .elem(out_elem));
endmodule
