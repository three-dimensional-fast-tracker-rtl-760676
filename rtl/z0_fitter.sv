// z0 fitter: turns the related stereo TSs of one track into points (s, z) of
// the helix and fits z = cot(theta) * s + z0 by weighted linear regression.
// For every stereo super-layer with a found TS:
//   1. TDC = raw TDC - event time (modulo the 9-bit TDC range);
//   2. drift length = x-t table[TDC];
//   3. fine phi = TS phi +- drift length / r, added for LR = right and
//      subtracted for LR = left (unknown LR: no correction);
//   4. z = z_endplate - 2r sin((phi_st - phi_ax)/2) / tan(theta_st);
//   5. arc length s = (2/rho) asin(r rho / 2) from a table indexed by rho.
// With weights w_i = 1/sigma_i^2 the fit is the closed form
//   D     = Sw*Sss - Ss^2
//   cot   = (Sw*Ssz - Ss*Sz) / D
//   z0    = (Sss*Sz - Ss*Ssz) / D.
// Steps 1-5 and the fit follow the paper. Two deliberate readings: the z
// equation is taken from the geometry, (z_endplate - z) tan(theta_st) =
// 2r sin(dphi/2), rather than from its printed form, which divides z_endplate
// by tan(theta_st) as well and is not dimensionally consistent; and s is the
// true arc length (2/rho) asin(r rho/2) rather than the bare asin(r rho/2),
// so that the slope is cot(theta). The pipeline, number formats, the LR
// encoding, the need for at least two points and the saturation of the
// outputs are this design's choices.
// Interface: in_valid/rho/et/hits describe one track; hits[sl] carries the
// TS ID, raw TDC, LR and phi_ax of the stereo TS found in super-layer sl.
// Timing: fully pipelined, one track per clock, LATENCY = 5 clocks.
module z0_fitter
  import tracker3d_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  input  logic [RHO_W-1:0]        rho,
  input  logic [TDC_W-1:0]        et,
  input  stereo_hit_t             hits [NUM_SL],
  output logic                    out_valid,
  output logic [NUM_SL-1:0]       found,
  output logic                    fit_valid,
  output logic signed [Z_W-1:0]   z0,
  output logic signed [COT_W-1:0] cot
);
  localparam int ZI_W = 18;            // internal z width, 1/64 cm
  typedef logic signed [63:0] acc_t;

  // ---- shared tables: x-t curve and sin(dphi/2)
  logic [DL_W-1:0] xt_rom  [TDC_N];
  logic [15:0]     sin_rom [SIN_N];
  always_comb
    for (int t = 0; t < TDC_N; t++) xt_rom[t] = xt_val(t);
  always_comb
    for (int a = 0; a < SIN_N; a++) sin_rom[a] = sin_val(a);

  // ---- stages 1 and 2, per super-layer
  logic [3:0]                     v_q;        // valid pipe
  logic [NUM_SL-1:0]              f1_q, f2_q;
  logic signed [ZI_W-1:0]         z2_q [NUM_SL];
  logic [S_W-1:0]                 s1_q [NUM_SL];
  logic [S_W-1:0]                 s2_q [NUM_SL];

  for (genvar sl = 0; sl < NUM_SL; sl++) begin : g_sl
    localparam int K_ID  = id2phi_k(sl);
    localparam int K_DL  = dl2phi_k(sl);
    localparam int K_Z   = zc_k(sl);
    localparam int K_END = zend_k(sl);

    logic [S_W-1:0]   arc_rom [RHO_N];
    always_comb
      for (int i = 0; i < RHO_N; i++) arc_rom[i] = arc_val(sl, i);

    logic [TDC_W-1:0] tdc;
    logic [DL_W-1:0]  dl;
    logic [31:0]      dphi_w, phits_w;
    logic [PHI_W-1:0] dphi, phi_ts, fine;
    logic [PHI_W-1:0] fine_q, phiax_q;

    always_comb begin
      tdc     = hits[sl].tdc - et;
      dl      = xt_rom[tdc];
      dphi_w  = 32'(dl) * 32'(K_DL) + 32'd32768;
      dphi    = dphi_w[16 +: PHI_W];
      phits_w = 32'(hits[sl].id) * 32'(K_ID) + 32'd128;
      phi_ts  = phits_w[8 +: PHI_W];
      case (hits[sl].lr)
        LR_RIGHT: fine = phi_ts + dphi;
        LR_LEFT:  fine = phi_ts - dphi;
        default:  fine = phi_ts;
      endcase
    end

    always_ff @(posedge clk) begin
      if (rst) begin
        f1_q[sl] <= 1'b0;
        fine_q   <= '0;
        phiax_q  <= '0;
        s1_q[sl] <= '0;
      end else begin
        f1_q[sl] <= in_valid && hits[sl].found;
        fine_q   <= fine;
        phiax_q  <= hits[sl].phi_ax;
        s1_q[sl] <= arc_rom[rho];
      end
    end

    // stage 2: z from the stereo displacement
    logic signed [PHI_W-1:0] dst;
    logic [PHI_W-1:0]        mag;
    logic [15:0]             sn;
    logic signed [49:0]      prod;
    logic signed [ZI_W-1:0]  zoff, zval;

    always_comb begin
      dst  = signed'(fine_q - phiax_q);
      mag  = (dst < 0) ? PHI_W'(-dst) : PHI_W'(dst);
      if (mag > PHI_W'(SIN_N - 1)) mag = PHI_W'(SIN_N - 1);
      sn   = sin_rom[mag[$clog2(SIN_N)-1:0]];
      prod = 50'(signed'(K_Z)) * signed'(50'(sn)) + 50'sd32768;
      zoff = ZI_W'(prod >>> 16);
      if (dst < 0) zoff = -zoff;
      zval = ZI_W'(K_END) - zoff;
    end

    always_ff @(posedge clk) begin
      if (rst) begin
        f2_q[sl] <= 1'b0;
        z2_q[sl] <= '0;
        s2_q[sl] <= '0;
      end else begin
        f2_q[sl] <= f1_q[sl];
        z2_q[sl] <= zval;
        s2_q[sl] <= s1_q[sl];
      end
    end
  end

  // ---- stage 3: weighted sums
  acc_t sw, ss, sz, sss, ssz;
  acc_t sw_q, ss_q, sz_q, sss_q, ssz_q;
  logic [2:0] n_c;
  logic       enough_q;
  logic [NUM_SL-1:0] f3_q, f4_q;

  always_comb begin
    sw = '0; ss = '0; sz = '0; sss = '0; ssz = '0; n_c = '0;
    for (int i = 0; i < NUM_SL; i++) begin
      acc_t w, s, z;
      w = f2_q[i] ? acc_t'(WEIGHT[i]) : 64'sd0;
      s = acc_t'(s2_q[i]);
      z = acc_t'(z2_q[i]);
      begin
        sw  += w;
        ss  += w * s;
        sz  += w * z;
        sss += w * s * s;
        ssz += w * s * z;
        if (f2_q[i]) n_c += 3'd1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      sw_q <= '0; ss_q <= '0; sz_q <= '0; sss_q <= '0; ssz_q <= '0;
      enough_q <= 1'b0;
      f3_q <= '0;
    end else begin
      sw_q <= sw; ss_q <= ss; sz_q <= sz; sss_q <= sss; ssz_q <= ssz;
      enough_q <= (n_c >= 3'd2);
      f3_q <= f2_q;
    end
  end

  // ---- stage 4: numerators and determinant
  acc_t den_q, ncot_q, nz0_q;
  logic ok4_q;
  always_ff @(posedge clk) begin
    if (rst) begin
      den_q <= '0; ncot_q <= '0; nz0_q <= '0; ok4_q <= 1'b0; f4_q <= '0;
    end else begin
      den_q  <= sw_q * sss_q - ss_q * ss_q;
      ncot_q <= sw_q * ssz_q - ss_q * sz_q;
      nz0_q  <= sss_q * sz_q - ss_q * ssz_q;
      ok4_q  <= enough_q;
      f4_q   <= f3_q;
    end
  end

  // ---- stage 5: division and saturation
  acc_t cot_full, z0_full;
  logic div_ok;
  always_comb begin
    div_ok   = ok4_q && (den_q > 0);
    cot_full = div_ok ? (ncot_q <<< 12) / den_q : 64'sd0;
    z0_full  = div_ok ? nz0_q / den_q : 64'sd0;
  end

  function automatic logic signed [15:0] sat16(acc_t v);
    if (v > 64'sd32767)  return 16'sh7fff;
    if (v < -64'sd32768) return 16'sh8000;
    return 16'(v);
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      v_q <= '0;
      out_valid <= 1'b0; found <= '0; fit_valid <= 1'b0; z0 <= '0; cot <= '0;
    end else begin
      v_q       <= {v_q[2:0], in_valid};
      out_valid <= v_q[3];
      found     <= f4_q;
      fit_valid <= v_q[3] && div_ok;
      z0        <= sat16(z0_full);
      cot       <= sat16(cot_full);
    end
  end
endmodule
