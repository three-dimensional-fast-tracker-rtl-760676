// Three dimensional tracker (3DT) of a drift-chamber level 1 trigger.
// Input every 32 ns (every 4th clock of 8 ns): a frame of up to 10 track
// segments (TS) from each of the four stereo track segment finders, the event
// time, and up to NUM_TRACKS 2D tracks from the 2D fitters. Output: per track
// the 2D parameters (charge, curvature, phi_i) together with z0 and
// cot(theta) from the 3D fit, and the event time aligned with them.
// Data flow, following the block diagram of the original work:
//   TSF frames -> data delayer -> four TS map makers -> TS maps
//   event time -> data delayer -> track units
//   2D tracks  ---------------------------> NUM_TRACKS track units
//                (stereo TS finders + delayers + z0 fitter)
//   event time -> long data delayer -> output, aligned with the results.
// The 2D fitters and the output packer are not part of this RTL: the 2D
// fitter results enter as trk_in, and the results leave unpacked as
// trk_out/et_out. stereo_out gives the related stereo TS that each track's
// finders chose, 2 clocks after the track entered. FIT2D_LATENCY is the latency of the external 2D fitters,
// counted from the TSF/event-time frame of the same event; the TSF data are
// delayed by FIT2D_LATENCY - 33 so that the TS maps and the 2D tracks meet,
// as in the original design, while its value (40) is this design's choice.
// Timing: a track entering at edge k leaves at edge k + TRACK_LATENCY (7).
module tracker3d_top
  import tracker3d_pkg::*;
#(
  parameter int HALF          = 0,   // which half of the chamber (0 or 1)
  parameter int FIT2D_LATENCY = 40
) (
  input  logic      clk,
  input  logic      rst,
  input  logic      tsf_valid [NUM_SL],
  input  ts_in_t    tsf_frame [NUM_SL][TS_PER_FRAME],
  input  evtime_t   et_in,
  input  track2d_t  trk_in    [NUM_TRACKS],
  output track3d_t  trk_out   [NUM_TRACKS],
  output stereo_hit_t stereo_out [NUM_TRACKS][NUM_SL], // related stereo TSs
  output evtime_t   et_out
);
  localparam int TSF_DELAY     = FIT2D_LATENCY - TS_MAP_LATENCY;
  localparam int TRACK_LATENCY = 7;
  localparam int FRAME_W       = 1 + TS_PER_FRAME * $bits(ts_in_t);

  // ---- TSF data delayers and TS map makers
  ts_entry_t map0 [N_HALF[0]];
  ts_entry_t map1 [N_HALF[1]];
  ts_entry_t map2 [N_HALF[2]];
  ts_entry_t map3 [N_HALF[3]];

  logic   dly_valid [NUM_SL];
  ts_in_t dly_frame [NUM_SL][TS_PER_FRAME];

  for (genvar sl = 0; sl < NUM_SL; sl++) begin : g_tsf
    logic [FRAME_W-1:0] fin, fout;
    always_comb begin
      fin[FRAME_W-1] = tsf_valid[sl];
      for (int j = 0; j < TS_PER_FRAME; j++)
        fin[j*$bits(ts_in_t) +: $bits(ts_in_t)] = tsf_frame[sl][j];
      dly_valid[sl] = fout[FRAME_W-1];
      for (int j = 0; j < TS_PER_FRAME; j++)
        dly_frame[sl][j] = fout[j*$bits(ts_in_t) +: $bits(ts_in_t)];
    end
    data_delayer #(.WIDTH(FRAME_W), .DEPTH(TSF_DELAY)) u_tsf_dly (
      .clk, .rst, .din(fin), .dout(fout));
  end

  ts_map_maker #(.N_TS(N_HALF[0])) u_map0 (
    .clk, .rst, .in_valid(dly_valid[0]), .frame(dly_frame[0]), .map(map0));
  ts_map_maker #(.N_TS(N_HALF[1])) u_map1 (
    .clk, .rst, .in_valid(dly_valid[1]), .frame(dly_frame[1]), .map(map1));
  ts_map_maker #(.N_TS(N_HALF[2])) u_map2 (
    .clk, .rst, .in_valid(dly_valid[2]), .frame(dly_frame[2]), .map(map2));
  ts_map_maker #(.N_TS(N_HALF[3])) u_map3 (
    .clk, .rst, .in_valid(dly_valid[3]), .frame(dly_frame[3]), .map(map3));

  // ---- event time: to the track units and, the long way, to the output
  evtime_t et_trk;
  data_delayer #(.WIDTH($bits(evtime_t)), .DEPTH(FIT2D_LATENCY)) u_et_dly (
    .clk, .rst, .din(et_in), .dout(et_trk));
  data_delayer #(.WIDTH($bits(evtime_t)), .DEPTH(TRACK_LATENCY)) u_et_out_dly (
    .clk, .rst, .din(et_trk), .dout(et_out));

  // ---- per-track 3D units
  for (genvar t = 0; t < NUM_TRACKS; t++) begin : g_trk
    track_unit #(.HALF(HALF)) u_unit (
      .clk, .rst, .trk(trk_in[t]), .et(et_trk),
      .map0, .map1, .map2, .map3,
      .hits(stereo_out[t]), .result(trk_out[t]));
  end
endmodule
