// Testbench of stereo_ts_finder, SL7 (176-entry half map) placed in the
// second half of the ring (HALF_OFFSET = 176), so window IDs outside the map
// occur. For each random track the map is filled with random hits, a few of
// them inside the track's window; the expected related TS is worked out in
// floating point: window from the TS ID nearest phi_ax, hit TSs looked up in
// the half map, the hit nearest the window centre chosen. The result is
// checked exactly two clocks after the track.
module tb_stereo_ts_finder;
  import tracker3d_pkg::*;
  import tb_geom_pkg::*;
  localparam int SL  = 3;
  localparam int NH  = N_HALF[SL];
  localparam int NF  = N_FULL[SL];
  localparam int OFF = NH;

  logic clk = 0, rst = 1;
  track2d_t    trk;
  ts_entry_t   map [NH];
  stereo_hit_t hit_out;
  int checks = 0, failures = 0, n_found = 0, n_none = 0, n_multi = 0, n_outside = 0;

  always #4 clk = ~clk;

  stereo_ts_finder #(.SL(SL), .HALF_OFFSET(OFF)) dut (.clk, .rst, .trk, .map, .hit_out);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    trk = '0;
    foreach (map[i]) map[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 600; n++) begin
      real pref, pos;
      int  idc, start, nhit, exp_k;
      bit  exp_found;
      int  order [WINDOW] = '{4, 5, 3, 6, 2, 7, 1, 8, 0, 9};
      int  wid [WINDOW];
      trk.valid  = 1'b1;
      trk.charge = 1'($urandom);
      trk.rho    = RHO_W'($urandom_range(0, 1300));
      trk.phi_i  = PHI_W'($urandom);
      pref = phi_ax_ref(SL, trk.charge, int'(trk.rho), int'(trk.phi_i));
      pos  = pref / TWO_PI * real'(NF);
      if ($sqrt((pos - $floor(pos) - 0.5) ** 2) < 0.02) begin n--; continue; end
      idc   = $rtoi(pos + 0.5) % NF;
      start = (TAN_ST[SL] > 0.0) ? idc : (idc - (WINDOW - 1) + NF) % NF;
      // background hits plus 0..3 hits in the window
      foreach (map[i]) begin
        map[i] = '0;
        if ($urandom_range(0, 9) == 0)
          map[i] = '{hit: 1'b1, tdc: TDC_W'($urandom), lr: 2'($urandom), pr: 2'($urandom)};
      end
      for (int k = 0; k < WINDOW; k++) begin
        int loc;
        wid[k] = (start + k) % NF;
        loc = (wid[k] - OFF + NF) % NF;
        if (loc < NH) map[loc].hit = 1'b0;
      end
      nhit = $urandom_range(0, 3);
      for (int h = 0; h < nhit; h++) begin
        int k, loc;
        k = $urandom_range(0, WINDOW - 1);
        loc = (wid[k] - OFF + NF) % NF;
        if (loc < NH) map[loc] = '{hit: 1'b1, tdc: TDC_W'($urandom), lr: 2'($urandom), pr: 2'($urandom)};
      end
      // expected result
      exp_found = 0; exp_k = 0;
      begin
        int cnt, nout;
        cnt = 0; nout = 0;
        for (int i = 0; i < WINDOW; i++) begin
          int loc;
          loc = (wid[order[i]] - OFF + NF) % NF;
          if (loc >= NH) nout++;
          else if (map[loc].hit) begin
            cnt++;
            if (!exp_found) begin exp_found = 1; exp_k = order[i]; end
          end
        end
        if (cnt > 1) n_multi++;
        if (nout > 0) n_outside++;
      end
      @(posedge clk); #1;
      trk.valid = 1'b0;
      @(posedge clk); #1;
      checks++;
      if (hit_out.found !== exp_found) begin
        failures++;
        $display("FAIL n=%0d found=%0d exp=%0d", n, hit_out.found, exp_found);
      end else if (exp_found) begin
        int loc;
        loc = (wid[exp_k] - OFF + NF) % NF;
        n_found++;
        checks++;
        if (int'(hit_out.id) != wid[exp_k] || hit_out.tdc !== map[loc].tdc ||
            hit_out.lr !== map[loc].lr || hit_out.pr !== map[loc].pr) begin
          failures++;
          $display("FAIL n=%0d id=%0d exp %0d", n, hit_out.id, wid[exp_k]);
        end
      end else n_none++;
    end
    checks++;
    if (n_found == 0 || n_none == 0 || n_multi == 0 || n_outside == 0) begin
      failures++;
      $display("FAIL cases not all covered");
    end
    $display("found=%0d none=%0d multi=%0d outside_half=%0d", n_found, n_none, n_multi, n_outside);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
