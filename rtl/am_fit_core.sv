// am_fit_core - least-squares segment fit of one candidate under one
// laterality hypothesis (combinational).
//
// For the 3 or 4 hits of a grouping candidate and a laterality pattern (bit i
// set = hit i lies right of its wire) the core computes, in closed form, the
// crossing time t0, the position x0 at the superlayer centre plane and the
// slope tan(psi), plus the chi2 of the fit.  Hit positions are wire position
// plus or minus v*(T_i - t0); t0, x0 and tan(psi) are the three unknowns of a
// linear least-squares problem whose normal matrix depends only on which
// layers are used and on the lateralities.  The per-hit weights and the
// reciprocals of the determinant come from am_pkg::fit_coef(), evaluated at
// elaboration into a 256-entry constant table indexed by {mask, lat}; the run
// time work is a few multiply-accumulates.  To keep words narrow, times are
// taken relative to the earliest hit and positions relative to the wire of the
// lowest used layer, and added back at the end.
//
// The solution is "physical" when every used hit has a drift time
// T_i - t0 between -DRIFT_TOL_NS and MAX_DRIFT_NS + DRIFT_TOL_NS.
// Outputs are t0 in ns (1 ns LSB), x0 in um, tan(psi) in Q4.12 and chi2 in
// um^2, all rounded to nearest.
//
// The three fitted quantities, the use of analytic least squares and the
// chi2 criterion follow the paper; the fixed-point scheme, the reciprocal
// method and the drift-time tolerance are this design's choices.
module am_fit_core
  import am_pkg::*;
#(
  parameter int DRIFT_TOL_NS = 2
) (
  input  cand_t              cand,
  input  logic [NLAYERS-1:0] lat,
  output logic               valid,
  output seg_t               seg
);
  fit_coef_t coef_tab [256];
  for (genvar g = 0; g < 256; g++) begin : g_coef
    localparam fit_coef_t C = fit_coef(4'(g >> 4), 4'(g));
    assign coef_tab[g] = C;
  end

  fit_coef_t coef;
  assign coef = coef_tab[{cand.mask, lat}];

  function automatic longint rsh_round(input longint v, input int sh);
    return (v + (longint'(1) <<< (sh - 1))) >>> sh;
  endfunction

  always_comb begin
    longint tref, xref, y [NLAYERS], s [NLAYERS];
    longint na, nm, nt, a, m, tau, t0off, t0, x0, tn, r, chi2, d;
    logic   phys;
    logic   first;

    seg = '0;
    // reference time and position
    tref = (longint'(1) << TIME_W);
    xref = 0;
    first = 1'b1;
    for (int i = 0; i < NLAYERS; i++) begin
      if (cand.mask[i]) begin
        if (longint'(cand.time_ns[i]) < tref) tref = longint'(cand.time_ns[i]);
        if (first) xref = longint'(half_pos(2'(i), int'(cand.wire_no[i]))) * HALF_CELL_UM;
        first = 1'b0;
      end
    end

    // signed hit positions relative to xref
    na = 0; nm = 0; nt = 0;
    for (int i = 0; i < NLAYERS; i++) begin
      s[i] = lat[i] ? 1 : -1;
      y[i] = longint'(half_pos(2'(i), int'(cand.wire_no[i]))) * HALF_CELL_UM - xref
           + s[i] * VDRIFT_UM_NS * (longint'(cand.time_ns[i]) - tref);
      if (cand.mask[i]) begin
        na += longint'($signed(coef.ca[i])) * y[i];
        nm += longint'($signed(coef.cm[i])) * y[i];
        nt += longint'($signed(coef.ct[i])) * y[i];
      end
    end

    a     = rsh_round(na * longint'(coef.r_pos), RECIP_SH);
    m     = rsh_round(nm * longint'(coef.r_pos), RECIP_SH);
    tau   = rsh_round(nt * longint'(coef.r_pos), RECIP_SH);
    tn    = rsh_round(nm * longint'(coef.r_tan), RECIP_SH);
    t0off = rsh_round(nt * longint'(coef.r_t0), RECIP_SH);
    x0    = xref + rsh_round((2 * na + 3 * nm) * longint'(coef.r_pos), RECIP_SH + 1);
    t0    = tref + t0off;

    chi2 = 0;
    r    = 0;
    d    = 0;
    phys = coef.ok;
    for (int i = 0; i < NLAYERS; i++) begin
      if (cand.mask[i]) begin
        r     = y[i] - a - m * i - s[i] * tau;
        chi2 += r * r;
        d     = longint'(cand.time_ns[i]) - t0;
        if (d < -DRIFT_TOL_NS || d > MAX_DRIFT_NS + DRIFT_TOL_NS) phys = 1'b0;
      end
    end
    if (t0 < 0) phys = 1'b0;

    valid       = phys;
    seg.quality = (cand.mask == 4'hF) ? Q_4H : Q_3H;
    seg.t0_ns   = TIME_W'(t0);
    seg.x0_um   = POS_W'(x0);
    seg.tanpsi  = TAN_W'(tn);
    seg.chi2    = CHI2_W'(chi2);
    seg.mask    = cand.mask;
    seg.lat     = lat;
  end
endmodule
