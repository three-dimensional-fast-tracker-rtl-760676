// Testbench-only reference model of the 3DT geometry, in floating point.
// It builds the stereo TSs a helix track leaves in the four stereo
// super-layers (the inverse of the z0 fitter) and recomputes, independently
// of the RTL tables and fixed-point formats, the values the RTL should give:
// phi_ax, the fine phi of a TS, z, the arc length and the weighted straight
// line fit of z against s. Units: cm, radians, ns.
package tb_geom_pkg;
  import tracker3d_pkg::*;

  localparam real TWO_PI = 2.0 * PI;

  typedef struct {
    int  id [NUM_SL];      // global TS ID
    int  tdc [NUM_SL];     // raw TDC
    int  lr [NUM_SL];
  } stereo_set_t;

  function automatic real wrap_pi(real a);
    while (a >  PI) a -= TWO_PI;
    while (a < -PI) a += TWO_PI;
    return a;
  endfunction

  function automatic real wrap_2pi(real a);
    while (a >= TWO_PI) a -= TWO_PI;
    while (a < 0.0)     a += TWO_PI;
    return a;
  endfunction

  // curvature in 1/cm from the RTL code
  function automatic real rho_cm(int rho_q);
    return real'(rho_q) / 65536.0;
  endfunction

  function automatic real phi_ax_ref(int sl, bit neg, int rho_q, int phi_i_q);
    real x, phi_i;
    x = R_CM[sl] * rho_cm(rho_q) / 2.0;
    if (x > 1.0) x = 1.0;
    phi_i = TWO_PI * real'(phi_i_q) / 65536.0;
    if (!neg) return wrap_2pi($acos(x) + phi_i - PI);
    else      return wrap_2pi(-$acos(x) + phi_i + PI);
  endfunction

  function automatic real arc_ref(int sl, int rho_q);
    real rho, x;
    rho = rho_cm(rho_q);
    if (rho_q == 0) return R_CM[sl];
    x = R_CM[sl] * rho / 2.0;
    if (x > 1.0) x = 1.0;
    return 2.0 / rho * $asin(x);
  endfunction

  function automatic real drift_cm(int tdc_rel);
    real d;
    d = DRIFT_UM_PER_NS * real'(tdc_rel);
    if (d > DRIFT_MAX_UM) d = DRIFT_MAX_UM;
    return d * 1.0e-4;
  endfunction

  // Stereo TSs of a helix with parameters (z0, cot) in every super-layer.
  function automatic stereo_set_t make_hits(bit neg, int rho_q, int phi_i_q,
                                            real z0, real cot, int et);
    stereo_set_t h;
    for (int sl = 0; sl < NUM_SL; sl++) begin
      real pax, s, z, dphi, pst, resid, pitch;
      int  id, trel;
      pax  = phi_ax_ref(sl, neg, rho_q, phi_i_q);
      s    = arc_ref(sl, rho_q);
      z    = z0 + cot * s;
      dphi = 2.0 * $asin((Z_END_CM[sl] - z) * TAN_ST[sl] / (2.0 * R_CM[sl]));
      pst  = wrap_2pi(pax + dphi);
      pitch = TWO_PI / real'(N_FULL[sl]);
      id   = $rtoi(pst / pitch + 0.5) % N_FULL[sl];
      resid = wrap_pi(pst - real'(id) * pitch);
      trel = $rtoi($sqrt(resid * resid) * R_CM[sl] * 1.0e4 / DRIFT_UM_PER_NS + 0.5);
      h.id[sl]  = id;
      h.tdc[sl] = (et + trel) % 512;
      h.lr[sl]  = (resid >= 0.0) ? 1 : 2;
    end
    return h;
  endfunction

  // z of one stereo TS, from its TS ID, raw TDC, LR and the track.
  function automatic real z_ref(int sl, int id, int tdc, int lr, int et, real pax);
    real fine, d;
    int  trel;
    trel = (tdc - et + 512) % 512;
    d    = drift_cm(trel) / R_CM[sl];
    fine = TWO_PI * real'(id) / real'(N_FULL[sl]);
    if (lr == 1) fine += d;
    else if (lr == 2) fine -= d;
    return Z_END_CM[sl] - 2.0 * R_CM[sl] * $sin(wrap_pi(fine - pax) / 2.0) / TAN_ST[sl];
  endfunction

  // Weighted fit z = cot*s + z0 over the super-layers in mask.
  function automatic void fit_ref(input real s [NUM_SL], input real z [NUM_SL],
                                  input bit [NUM_SL-1:0] mask,
                                  output real cot, output real z0);
    real sw, ss, sz, sss, ssz, d;
    sw = 0; ss = 0; sz = 0; sss = 0; ssz = 0;
    for (int i = 0; i < NUM_SL; i++)
      if (mask[i]) begin
        sw  += WEIGHT[i];
        ss  += WEIGHT[i] * s[i];
        sz  += WEIGHT[i] * z[i];
        sss += WEIGHT[i] * s[i] * s[i];
        ssz += WEIGHT[i] * s[i] * z[i];
      end
    d   = sw * sss - ss * ss;
    cot = (sw * ssz - ss * sz) / d;
    z0  = (sss * sz - ss * ssz) / d;
  endfunction
endpackage
