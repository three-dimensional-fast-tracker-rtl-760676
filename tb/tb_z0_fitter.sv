// Testbench of z0_fitter. Random helix tracks (charge, curvature, phi_i, z0,
// cot(theta)) and a random event time are turned by the floating-point
// reference model into the stereo TSs they leave (TS ID, raw TDC, LR) and
// phi_ax. The fitter's z0 and cot(theta) are compared with a floating-point
// fit of the same TS data (tolerance 0.2 cm and 0.004, doubled for
// two-point fits) and, more loosely,
// with the generated track. Tracks with 4, 3, 2 and 1 stereo TSs are mixed:
// one TS must give fit_valid = 0. Tracks enter back to back, one per clock,
// and every result must appear exactly 5 clocks later.
module tb_z0_fitter;
  import tracker3d_pkg::*;
  import tb_geom_pkg::*;
  localparam int LAT = 5;
  localparam int NT  = 400;

  logic clk = 0, rst = 1;
  logic                    in_valid;
  logic [RHO_W-1:0]        rho;
  logic [TDC_W-1:0]        et;
  stereo_hit_t             hits [NUM_SL];
  logic                    out_valid, fit_valid;
  logic [NUM_SL-1:0]       found;
  logic signed [Z_W-1:0]   z0;
  logic signed [COT_W-1:0] cot;

  real exp_z0 [NT], exp_cot [NT], true_z0 [NT];
  bit  exp_ok [NT];
  bit [NUM_SL-1:0] exp_mask [NT];
  int checks = 0, failures = 0, n_fit = 0, n_nofit = 0;

  always #4 clk = ~clk;

  z0_fitter dut (.clk, .rst, .in_valid, .rho, .et, .hits,
                 .out_valid, .found, .fit_valid, .z0, .cot);

  initial begin
    #((NT + 100) * 8);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stimulus: one track per clock
  initial begin
    in_valid = 0; rho = '0; et = '0;
    foreach (hits[i]) hits[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < NT; n++) begin
      stereo_set_t h;
      bit neg;
      int rq, pq, e, nf;
      real zt, ct, s [NUM_SL], z [NUM_SL], pax [NUM_SL];
      neg = 1'($urandom);
      rq  = $urandom_range(0, 1000);
      pq  = $urandom_range(0, 65535);
      e   = $urandom_range(0, 511);
      zt  = real'($urandom_range(0, 4000)) / 100.0 - 20.0;
      ct  = real'($urandom_range(0, 1000)) / 1000.0 - 0.5;
      h   = make_hits(neg, rq, pq, zt, ct, e);
      nf  = (n % 8 == 7) ? 1 : (n % 8 == 6) ? 2 : (n % 8 == 5) ? 3 : 4;
      exp_mask[n] = '0;
      for (int sl = 0; sl < NUM_SL; sl++) begin
        real p;
        p = phi_ax_ref(sl, neg, rq, pq);
        pax[sl] = p;
        hits[sl].found  = (sl < nf) || (nf == 3 && sl == 3);
        if (nf == 3 && sl == 2) hits[sl].found = 1'b0;
        hits[sl].id     = ID_W'(h.id[sl]);
        hits[sl].tdc    = TDC_W'(h.tdc[sl]);
        hits[sl].lr     = 2'(h.lr[sl]);
        hits[sl].pr     = '0;
        hits[sl].phi_ax = PHI_W'($rtoi(p / TWO_PI * 65536.0 + 0.5));
        exp_mask[n][sl] = hits[sl].found;
        s[sl] = arc_ref(sl, rq);
        z[sl] = z_ref(sl, h.id[sl], h.tdc[sl], h.lr[sl], e,
                      TWO_PI * real'(hits[sl].phi_ax) / 65536.0);
      end
      exp_ok[n] = (nf >= 2);
      true_z0[n] = zt;
      if (exp_ok[n]) fit_ref(s, z, exp_mask[n], exp_cot[n], exp_z0[n]);
      in_valid = 1'b1;
      rho = RHO_W'(rq);
      et  = TDC_W'(e);
      @(posedge clk); #1;
    end
    in_valid = 1'b0;
  end

  // checker: count edges after each input and expect the result at LAT
  int edge_n = 0;
  int first_edge = -1;
  always @(posedge clk) begin
    if (!rst) edge_n <= edge_n + 1;
  end

  initial begin
    int got;
    got = 0;
    @(negedge rst);
    // track n is sampled at edge n+1 after reset release; result after edge n+1+LAT-1
    forever begin
      @(posedge clk); #2;
      if (out_valid) begin
        int n;
        real gz, gc;
        n = got;
        checks++;
        if (edge_n != n + LAT) begin
          failures++;
          $display("FAIL latency track %0d at edge %0d", n, edge_n);
        end
        checks++;
        if (found !== exp_mask[n] || fit_valid !== exp_ok[n]) begin
          failures++;
          $display("FAIL flags n=%0d found=%b/%b fit=%0d/%0d", n, found, exp_mask[n], fit_valid, exp_ok[n]);
        end
        if (exp_ok[n]) begin
          gz = real'(z0) / 64.0;
          gc = real'(cot) / 4096.0;
          n_fit++;
          checks++;
          // a two-point fit extrapolates the fixed-point rounding of z by up
          // to ~2.5x to s = 0, so it gets a wider tolerance
          if ($sqrt((gz - exp_z0[n]) ** 2) > ($countones(exp_mask[n]) == 2 ? 0.4 : 0.2) ||
              $sqrt((gc - exp_cot[n]) ** 2) > ($countones(exp_mask[n]) == 2 ? 0.008 : 0.004)) begin
            failures++;
            $display("FAIL fit n=%0d z0 %f/%f cot %f/%f", n, gz, exp_z0[n], gc, exp_cot[n]);
          end
          checks++;
          if ($sqrt((gz - true_z0[n]) ** 2) > 3.0 && found == '1) begin
            failures++;
            $display("FAIL truth n=%0d z0 %f true %f", n, gz, true_z0[n]);
          end
        end else n_nofit++;
        got++;
        if (got == NT) begin
          checks++;
          if (n_fit == 0 || n_nofit == 0) failures++;
          $display("fits=%0d no_fit=%0d", n_fit, n_nofit);
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end
    end
  end
endmodule
