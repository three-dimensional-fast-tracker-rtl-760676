// Testbench of track_unit (half 0). For each random helix track the four TS
// maps are cleared and loaded with the track's stereo TSs, computed by the
// floating-point reference model; one super-layer is sometimes left empty.
// Checked 7 clocks after the track: valid, the 2D parameters carried
// through, the found mask, fit_valid, and z0 / cot(theta) against the
// generated track (1 cm, 0.03). The related TS IDs are checked on the hits
// output 2 clocks after the track.
module tb_track_unit;
  import tracker3d_pkg::*;
  import tb_geom_pkg::*;
  localparam int NT = 150;

  logic clk = 0, rst = 1;
  track2d_t    trk;
  evtime_t     et;
  ts_entry_t   map0 [N_HALF[0]];
  ts_entry_t   map1 [N_HALF[1]];
  ts_entry_t   map2 [N_HALF[2]];
  ts_entry_t   map3 [N_HALF[3]];
  stereo_hit_t hits [NUM_SL];
  track3d_t    result;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  track_unit dut (.clk, .rst, .trk, .et, .map0, .map1, .map2, .map3, .hits, .result);

  initial begin
    #(NT * 20 * 8 + 1000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real absr(real a);
    return (a < 0.0) ? -a : a;
  endfunction

  initial begin
    trk = '0; et = '0;
    foreach (map0[i]) map0[i] = '0;
    foreach (map1[i]) map1[i] = '0;
    foreach (map2[i]) map2[i] = '0;
    foreach (map3[i]) map3[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < NT; n++) begin
      bit neg, ok;
      int rq, pq, e, drop;
      real zt, ct;
      stereo_set_t h;
      bit [NUM_SL-1:0] m;
      do begin
        neg = 1'($urandom);
        rq  = $urandom_range(0, 900);
        pq  = $urandom_range(0, 65535);
        e   = $urandom_range(0, 511);
        zt  = real'($urandom_range(0, 2000)) / 100.0 - 10.0;
        ct  = real'($urandom_range(0, 600)) / 1000.0 - 0.3;
        h   = make_hits(neg, rq, pq, zt, ct, e);
        ok  = 1;
        for (int sl = 0; sl < NUM_SL; sl++)
          if (h.id[sl] >= N_HALF[sl]) ok = 0;
      end while (!ok);
      drop = (n % 3 == 0) ? $urandom_range(0, NUM_SL - 1) : -1;
      m = '1;
      if (drop >= 0) m[drop] = 1'b0;
      foreach (map0[i]) map0[i] = '0;
      foreach (map1[i]) map1[i] = '0;
      foreach (map2[i]) map2[i] = '0;
      foreach (map3[i]) map3[i] = '0;
      if (m[0]) map0[h.id[0]] = '{hit: 1'b1, tdc: TDC_W'(h.tdc[0]), lr: 2'(h.lr[0]), pr: 2'b01};
      if (m[1]) map1[h.id[1]] = '{hit: 1'b1, tdc: TDC_W'(h.tdc[1]), lr: 2'(h.lr[1]), pr: 2'b01};
      if (m[2]) map2[h.id[2]] = '{hit: 1'b1, tdc: TDC_W'(h.tdc[2]), lr: 2'(h.lr[2]), pr: 2'b01};
      if (m[3]) map3[h.id[3]] = '{hit: 1'b1, tdc: TDC_W'(h.tdc[3]), lr: 2'(h.lr[3]), pr: 2'b01};
      trk = '{valid: 1'b1, charge: neg, rho: RHO_W'(rq), phi_i: PHI_W'(pq)};
      et  = '{valid: 1'b1, t: TDC_W'(e)};
      @(posedge clk); #1;
      trk = '0;
      @(posedge clk); #1;
      for (int sl = 0; sl < NUM_SL; sl++) begin
        checks++;
        if (hits[sl].found !== m[sl] || (m[sl] && int'(hits[sl].id) != h.id[sl])) begin
          failures++;
          $display("FAIL n=%0d sl=%0d found %0d id %0d exp %0d", n, sl, hits[sl].found, hits[sl].id, h.id[sl]);
        end
      end
      repeat (4) @(posedge clk);
      #1;
      checks++;
      if (result.valid) begin failures++; $display("FAIL n=%0d result a clock early", n); end
      @(posedge clk); #1;
      checks++;
      if (!result.valid || result.found !== m || !result.fit_valid ||
          result.rho !== RHO_W'(rq) || result.phi_i !== PHI_W'(pq) || result.charge !== neg) begin
        failures++;
        $display("FAIL n=%0d flags valid=%0d found=%b", n, result.valid, result.found);
      end else begin
        checks++;
        if (absr(real'(result.z0) / 64.0 - zt) > 1.0 || absr(real'(result.cot) / 4096.0 - ct) > 0.03) begin
          failures++;
          $display("FAIL n=%0d z0 %f/%f cot %f/%f", n, real'(result.z0) / 64.0, zt,
                   real'(result.cot) / 4096.0, ct);
        end
      end
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
