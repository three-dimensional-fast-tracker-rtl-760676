// Testbench of possible_ts_calculator for all four stereo super-layers.
// Random 2D tracks (both charges, curvatures including ones that do not
// reach the layer) are applied; phi_ax is compared with the floating-point
// formula +-acos(r*rho/2) + phi_i -+ pi, and the 10-TS window with the TS ID
// nearest phi_ax, laid out towards the stereo twist of the layer.
module tb_possible_ts_calculator;
  import tracker3d_pkg::*;
  import tb_geom_pkg::*;

  track2d_t         trk;
  logic [PHI_W-1:0] phi_ax [NUM_SL];
  logic [ID_W-1:0]  win [NUM_SL][WINDOW];
  int checks = 0, failures = 0;

  for (genvar sl = 0; sl < NUM_SL; sl++) begin : g_sl
    possible_ts_calculator #(.SL(sl)) dut (.trk, .phi_ax(phi_ax[sl]), .win_id(win[sl]));
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      trk.valid  = 1'b1;
      trk.charge = 1'($urandom);
      trk.rho    = (n < 5) ? RHO_W'(n * 400) : RHO_W'($urandom);
      trk.phi_i  = PHI_W'($urandom);
      #1;
      for (int sl = 0; sl < NUM_SL; sl++) begin
        real pref, pdut, d, pos;
        int  idc, start;
        pref = phi_ax_ref(sl, trk.charge, int'(trk.rho), int'(trk.phi_i));
        pdut = TWO_PI * real'(phi_ax[sl]) / 65536.0;
        d = wrap_pi(pdut - pref);
        checks++;
        if (d > 3.0e-4 || d < -3.0e-4) begin
          failures++;
          $display("FAIL phi_ax sl=%0d rho=%0d ref=%f dut=%f", sl, trk.rho, pref, pdut);
        end
        // window: skip IDs that sit within rounding distance of a TS boundary
        pos = pref / TWO_PI * real'(N_FULL[sl]);
        if ($sqrt((pos - $floor(pos) - 0.5) ** 2) > 0.02) begin
          idc = $rtoi(pos + 0.5) % N_FULL[sl];
          start = (TAN_ST[sl] > 0.0) ? idc : (idc - (WINDOW - 1) + N_FULL[sl]) % N_FULL[sl];
          for (int k = 0; k < WINDOW; k++) begin
            checks++;
            if (int'(win[sl][k]) != (start + k) % N_FULL[sl]) begin
              failures++;
              $display("FAIL win sl=%0d k=%0d got %0d exp %0d", sl, k, win[sl][k], (start + k) % N_FULL[sl]);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
