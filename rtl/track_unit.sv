// Track unit: the per-track 3D chain of the 3DT. For one 2D track it runs
// four stereo TS finders, one per stereo super-layer (SL1, SL3, SL5, SL7),
// in parallel, delays the 2D track and the event time by the finders'
// latency, and feeds all of it to the z0 fitter. The 2D track parameters are
// delayed once more by the fitter latency, so the output carries the 2D and
// 3D parameters of the track together. The 3DT holds NUM_TRACKS copies.
// The arrangement (finder and data delayers side by side in front of the z0
// fitter) follows the block diagram of the original work; the latencies are
// this design's: 2 clocks for the finders, 5 for the fitter, 7 in total.
// Interface: trk/et are sampled every clock; map0..map3 are the TS maps of
// the four stereo super-layers (80/112/144/176 entries) covering the half of
// the chamber selected by HALF (0 or 1); result is valid LATENCY clocks
// after trk.valid.
module track_unit
  import tracker3d_pkg::*;
#(
  parameter int HALF = 0
) (
  input  logic        clk,
  input  logic        rst,
  input  track2d_t    trk,
  input  evtime_t     et,
  input  ts_entry_t   map0 [N_HALF[0]],
  input  ts_entry_t   map1 [N_HALF[1]],
  input  ts_entry_t   map2 [N_HALF[2]],
  input  ts_entry_t   map3 [N_HALF[3]],
  output stereo_hit_t hits [NUM_SL],
  output track3d_t    result
);
  localparam int FINDER_LATENCY = 2;
  localparam int FITTER_LATENCY = 5;

  stereo_ts_finder #(.SL(0), .HALF_OFFSET(HALF * N_HALF[0])) u_find0 (
    .clk, .rst, .trk, .map(map0), .hit_out(hits[0]));
  stereo_ts_finder #(.SL(1), .HALF_OFFSET(HALF * N_HALF[1])) u_find1 (
    .clk, .rst, .trk, .map(map1), .hit_out(hits[1]));
  stereo_ts_finder #(.SL(2), .HALF_OFFSET(HALF * N_HALF[2])) u_find2 (
    .clk, .rst, .trk, .map(map2), .hit_out(hits[2]));
  stereo_ts_finder #(.SL(3), .HALF_OFFSET(HALF * N_HALF[3])) u_find3 (
    .clk, .rst, .trk, .map(map3), .hit_out(hits[3]));

  // data delayers beside the finders
  track2d_t trk_d1, trk_d2;
  evtime_t  et_d1;

  data_delayer #(.WIDTH($bits(track2d_t)), .DEPTH(FINDER_LATENCY)) u_trk_dly (
    .clk, .rst, .din(trk), .dout(trk_d1));
  data_delayer #(.WIDTH($bits(evtime_t)), .DEPTH(FINDER_LATENCY)) u_et_dly (
    .clk, .rst, .din(et), .dout(et_d1));

  logic                    fit_out_valid, fit_ok;
  logic [NUM_SL-1:0]       fit_found;
  logic signed [Z_W-1:0]   fit_z0;
  logic signed [COT_W-1:0] fit_cot;

  z0_fitter u_fit (
    .clk, .rst,
    .in_valid(trk_d1.valid), .rho(trk_d1.rho), .et(et_d1.t), .hits(hits),
    .out_valid(fit_out_valid), .found(fit_found), .fit_valid(fit_ok),
    .z0(fit_z0), .cot(fit_cot));

  // 2D parameters wait for the fitter
  data_delayer #(.WIDTH($bits(track2d_t)), .DEPTH(FITTER_LATENCY)) u_trk_dly2 (
    .clk, .rst, .din(trk_d1), .dout(trk_d2));

  always_comb begin
    result.valid     = trk_d2.valid && fit_out_valid;
    result.charge    = trk_d2.charge;
    result.rho       = trk_d2.rho;
    result.phi_i     = trk_d2.phi_i;
    result.found     = fit_found;
    result.fit_valid = fit_ok;
    result.z0        = fit_z0;
    result.cot       = fit_cot;
  end
endmodule
