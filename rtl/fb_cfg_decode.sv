// Control signal generator.
//
// Derives the per-layer control of the PE datapath from the configured
// activation, weight and output formats. The architecture generates these
// signals in a compiler and broadcasts them to all PEs; this module is the
// hardware form of the same computation, evaluated once per layer:
//  * mantissa widths m = p - 1 - e (integer mode: e = 0, magnitude p-1),
//  * elements per register n = min(REG_W/p, R_S, R_E/e, R_M/m),
//  * the products per cycle, limited by NPROD, by L_PRIM/(ma*mw) primitives
//    and by L_ADD/sw exponent-adder segments; the weight count is reduced
//    first so that na*nw products form a complete outer product,
//  * FBEA segment width sw = max(ea, ew) + 1 and its carry-break vector.
// Combinational.
module fb_cfg_decode
  import flexibit_pkg::*;
(
  input  fb_cfg_t cfg,
  output fb_ctl_t ctl
);
  function automatic int unsigned min2(input int unsigned a, input int unsigned b);
    return (a < b) ? a : b;
  endfunction

  function automatic int unsigned elems(input int unsigned p, input int unsigned e,
                                        input int unsigned m);
    int unsigned n;
    n = (p == 0) ? 0 : REG_W / p;
    n = min2(n, R_S);
    if (e != 0) n = min2(n, R_E / e);
    if (m != 0) n = min2(n, R_M / m);
    return n;
  endfunction

  always_comb begin
    int unsigned ea, ew, ma, mw, na, nw, cap, sw;
    ea = cfg.int_mode ? 0 : 32'(cfg.ea);
    ew = cfg.int_mode ? 0 : 32'(cfg.ew);
    ma = (32'(cfg.pa) > ea) ? 32'(cfg.pa) - 1 - ea : 0;
    mw = (32'(cfg.pw) > ew) ? 32'(cfg.pw) - 1 - ew : 0;
    na = elems(32'(cfg.pa), ea, ma);
    nw = elems(32'(cfg.pw), ew, mw);
    sw = ((ea > ew) ? ea : ew) + 1;
    cap = NPROD;
    if (ma * mw != 0) cap = min2(cap, L_PRIM / (ma * mw));
    if (!cfg.int_mode) cap = min2(cap, L_ADD / sw);
    if (na > cap) begin
      na = cap;
      nw = 1;
    end else if (na != 0) begin
      nw = min2(nw, cap / na);
    end
    ctl.ma    = 5'(ma);
    ctl.mw    = 5'(mw);
    ctl.mo    = (cfg.int_mode) ? 5'(cfg.po - 5'd1)
                               : ((cfg.po > 5'(cfg.eo)) ? 5'(cfg.po - 5'd1 - 5'(cfg.eo)) : 5'd0);
    ctl.na    = 5'(na);
    ctl.nw    = 5'(nw);
    ctl.nprod = 6'(na * nw);
    ctl.sw    = 5'(sw);
    for (int unsigned i = 0; i < L_ADD; i++)
      ctl.fbea_ctrl[i] = ((i + 1) % sw == 0);
  end
endmodule
