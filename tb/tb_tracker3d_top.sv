// End-to-end testbench of tracker3d_top at its default parameters (full
// map sizes, 4 tracks, 33-clock TS map latency, 40-clock 2D fitter latency).
// Each event: helix tracks are generated in floating point, their stereo TSs
// are sent as TSF frames (in the 32 ns frame slots, local TS IDs of half 0),
// together with the event time, decoy hits beside the true TSs and noise far
// from them. FIT2D_LATENCY clocks later the 2D tracks are presented, as the
// 2D fitters would deliver them. Checked per track: the related stereo TS
// chosen in each super-layer (2 clocks after the track), and after 7 clocks
// the found mask, fit_valid, z0 and cot(theta) against the generated track,
// and the event time travelling alongside.
// Mechanisms that must each occur at least once (a failure is counted for
// one that never does): several tracks at once, a window holding more than
// one hit (middle selection), a super-layer without a TS (3-point fit), a
// track with a single TS (no fit), an entry rewritten while still held
// (refresh: stale TDCs first, true ones later), hits that have expired from
// the map before their track comes, and left and right drift corrections.
module tb_tracker3d_top;
  import tracker3d_pkg::*;
  import tb_geom_pkg::*;
  localparam int FIT2D = 40;
  localparam int TLAT  = 7;
  localparam int NEV   = 200;

  logic clk = 0, rst = 1;
  logic      tsf_valid [NUM_SL];
  ts_in_t    tsf_frame [NUM_SL][TS_PER_FRAME];
  evtime_t   et_in;
  track2d_t  trk_in  [NUM_TRACKS];
  track3d_t  trk_out [NUM_TRACKS];
  stereo_hit_t stereo_out [NUM_TRACKS][NUM_SL];
  evtime_t   et_out;

  tracker3d_top dut (.clk, .rst, .tsf_valid, .tsf_frame, .et_in, .trk_in,
                     .trk_out, .stereo_out, .et_out);

  always #4 clk = ~clk;

  int checks = 0, failures = 0;
  int n_multi_trk = 0, n_multi_hit = 0, n_missing = 0, n_nofit = 0;
  int n_refresh = 0, n_expired = 0, n_left = 0, n_right = 0, n_tracks = 0;

  initial begin
    #(NEV * 200 * 8 + 10000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // count windows holding more than one hit in the first track unit
  always @(posedge clk)
    if (!rst) begin
      if (dut.g_trk[0].u_unit.u_find0.vld_q && $countones(dut.g_trk[0].u_unit.u_find0.cand_hit) > 1) n_multi_hit++;
      if (dut.g_trk[0].u_unit.u_find3.vld_q && $countones(dut.g_trk[0].u_unit.u_find3.cand_hit) > 1) n_multi_hit++;
    end

  task automatic idle_inputs();
    for (int sl = 0; sl < NUM_SL; sl++) begin
      tsf_valid[sl] = 1'b0;
      for (int j = 0; j < TS_PER_FRAME; j++) tsf_frame[sl][j] = '0;
    end
    et_in = '0;
    foreach (trk_in[t]) trk_in[t] = '0;
  endtask

  task automatic tick(int n);
    repeat (n) @(posedge clk);
    #1;
  endtask

  function automatic real absr(real a);
    return (a < 0.0) ? -a : a;
  endfunction

  initial begin
    idle_inputs();
    tick(3);
    rst = 0;
    tick(1);   // edge count from here is a multiple of 4: frame slots
    for (int ev = 0; ev < NEV; ev++) begin
      int ntrk, e, kind, slot [NUM_SL];
      bit neg [NUM_TRACKS];
      int rq [NUM_TRACKS], pq [NUM_TRACKS];
      real zt [NUM_TRACKS], ct [NUM_TRACKS];
      stereo_set_t h [NUM_TRACKS];
      bit [NUM_SL-1:0] mask [NUM_TRACKS];
      // kind 0: normal; 1: refresh (stale frame first); 2: track comes late
      kind = (ev % 5 == 3) ? 1 : (ev % 7 == 5) ? 2 : 0;
      ntrk = (ev % 3 == 0) ? 1 : $urandom_range(2, NUM_TRACKS);
      e    = $urandom_range(0, 511);
      for (int t = 0; t < ntrk; t++) begin
        bit ok;
        int tries;
        tries = 0;
        do begin
          tries++;
          neg[t] = 1'($urandom);
          rq[t]  = $urandom_range(100, 900);
          pq[t]  = $urandom_range(0, 65535);
          zt[t]  = real'($urandom_range(0, 2000)) / 100.0 - 10.0;
          ct[t]  = real'($urandom_range(0, 600)) / 1000.0 - 0.3;
          h[t]   = make_hits(neg[t], rq[t], pq[t], zt[t], ct[t], e);
          ok = 1;
          for (int sl = 0; sl < NUM_SL; sl++) begin
            if (h[t].id[sl] < 12 || h[t].id[sl] > N_HALF[sl] - 12) ok = 0;
            for (int u = 0; u < t; u++)    // keep windows and decoys apart
              if ((h[t].id[sl] - h[u].id[sl]) ** 2 < 169) ok = 0;
          end
        end while (!ok && tries < 300);
        if (!ok) begin         // no room for another track: fewer tracks
          ntrk = t;
          break;
        end
        mask[t] = '1;
        if (ev % 4 == 1 && t == 0) mask[t][$urandom_range(0, NUM_SL - 1)] = 1'b0;
        if (ev % 9 == 4 && t == 0) mask[t] = 4'b0100;
      end
      if (ntrk > 1) n_multi_trk++;

      // stale frame with the same TS IDs and junk TDCs, 2 frames earlier
      if (kind == 1) begin
        for (int sl = 0; sl < NUM_SL; sl++) begin
          tsf_valid[sl] = 1'b1;
          for (int t = 0; t < ntrk; t++)
            tsf_frame[sl][t] = '{valid: mask[t][sl], id: ID_W'(h[t].id[sl]),
                                 tdc: TDC_W'($urandom), lr: 2'(h[t].lr[sl]), pr: 2'b01};
        end
        tick(1);
        idle_inputs();
        tick(2 * CLK_PER_FRAME - 1);
        n_refresh++;
      end

      // the event's frame: true TSs, decoys, far noise
      et_in = '{valid: 1'b1, t: TDC_W'(e)};
      for (int sl = 0; sl < NUM_SL; sl++) begin
        int j;
        real pos, ctr;
        tsf_valid[sl] = 1'b1;
        j = 0;
        for (int t = 0; t < ntrk; t++) begin
          tsf_frame[sl][j] = '{valid: mask[t][sl], id: ID_W'(h[t].id[sl]),
                               tdc: TDC_W'(h[t].tdc[sl]), lr: 2'(h[t].lr[sl]), pr: 2'b01};
          j++;
          if (mask[t][sl]) begin
            if (h[t].lr[sl] == 1) n_right++; else n_left++;
          end
        end
        // decoy for track 0: 3 TS further from the window centre
        pos = phi_ax_ref(sl, neg[0], rq[0], pq[0]) / TWO_PI * real'(N_FULL[sl]);
        ctr = (TAN_ST[sl] > 0.0) ? $floor(pos + 0.5) + 4.5 : $floor(pos + 0.5) - 4.5;
        if (mask[0][sl]) begin
          int d;
          d = (real'(h[0].id[sl]) > ctr) ? 3 : -3;
          tsf_frame[sl][j] = '{valid: 1'b1, id: ID_W'(h[0].id[sl] + d),
                               tdc: TDC_W'($urandom), lr: 2'b01, pr: 2'b10};
          j++;
        end
        // noise: IDs below 4 are at least 8 TS from every track
        tsf_frame[sl][j] = '{valid: 1'b1, id: ID_W'($urandom_range(0, 3)),
                             tdc: TDC_W'($urandom), lr: 2'($urandom), pr: 2'b11};
      end
      tick(1);
      idle_inputs();
      // 2D tracks from the 2D fitters
      tick(FIT2D - 1 + ((kind == 2) ? HOLD_CLKS + 8 : 0));
      if (kind == 2) n_expired++;
      for (int t = 0; t < ntrk; t++)
        trk_in[t] = '{valid: 1'b1, charge: neg[t], rho: RHO_W'(rq[t]), phi_i: PHI_W'(pq[t])};
      tick(1);
      foreach (trk_in[t]) trk_in[t] = '0;
      // related stereo TSs, 2 clocks after the track
      tick(1);
      for (int t = 0; t < ntrk; t++)
        for (int sl = 0; sl < NUM_SL; sl++) begin
          bit exp_found;
          exp_found = mask[t][sl] && kind != 2;
          checks++;
          if (stereo_out[t][sl].found !== exp_found ||
              (exp_found && (int'(stereo_out[t][sl].id) != h[t].id[sl] ||
                             int'(stereo_out[t][sl].tdc) != h[t].tdc[sl]))) begin
            failures++;
            $display("FAIL ev %0d trk %0d sl %0d: found %0d id %0d tdc %0d, exp %0d %0d %0d", ev, t, sl,
                     stereo_out[t][sl].found, stereo_out[t][sl].id, stereo_out[t][sl].tdc,
                     exp_found, h[t].id[sl], h[t].tdc[sl]);
          end
        end
      // 3D results
      tick(TLAT - 2);
      for (int t = 0; t < NUM_TRACKS; t++) begin
        checks++;
        if (trk_out[t].valid !== (t < ntrk)) begin
          failures++;
          $display("FAIL ev %0d trk %0d valid %0d", ev, t, trk_out[t].valid);
        end
      end
      checks++;
      if (kind != 2 && (et_out.valid !== 1'b1 || int'(et_out.t) != e)) begin
        failures++;
        $display("FAIL ev %0d event time %0d/%0d exp %0d", ev, et_out.valid, et_out.t, e);
      end
      for (int t = 0; t < ntrk; t++) begin
        bit [NUM_SL-1:0] em;
        bit eok;
        em  = (kind == 2) ? '0 : mask[t];
        eok = $countones(em) >= 2;
        n_tracks++;
        if (!eok) n_nofit++;
        else if (em != '1) n_missing++;
        checks++;
        if (trk_out[t].found !== em || trk_out[t].fit_valid !== eok ||
            trk_out[t].rho !== RHO_W'(rq[t]) || trk_out[t].phi_i !== PHI_W'(pq[t]) ||
            trk_out[t].charge !== neg[t]) begin
          failures++;
          $display("FAIL ev %0d trk %0d flags found=%b/%b fit=%0d/%0d", ev, t,
                   trk_out[t].found, em, trk_out[t].fit_valid, eok);
        end
        if (eok) begin
          real gz, gc;
          gz = real'(trk_out[t].z0) / 64.0;
          gc = real'(trk_out[t].cot) / 4096.0;
          checks++;
          if (absr(gz - zt[t]) > 1.0 || absr(gc - ct[t]) > 0.03) begin
            failures++;
            $display("FAIL ev %0d trk %0d z0 %f/%f cot %f/%f", ev, t, gz, zt[t], gc, ct[t]);
          end
        end
      end
      tick(120);      // let the map empty before the next event
    end
    begin
      string names [8] = '{"multi_track", "multi_hit_window", "missing_sl", "no_fit",
                           "refresh", "expired", "lr_left", "lr_right"};
      int cnt [8];
      cnt = '{n_multi_trk, n_multi_hit, n_missing, n_nofit, n_refresh, n_expired, n_left, n_right};
      for (int i = 0; i < 8; i++) begin
        $display("mechanism %s: %0d", names[i], cnt[i]);
        checks++;
        if (cnt[i] == 0) begin
          failures++;
          $display("FAIL mechanism %s never happened", names[i]);
        end
      end
    end
    $display("tracks checked: %0d", n_tracks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
