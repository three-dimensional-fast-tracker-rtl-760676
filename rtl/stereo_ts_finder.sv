// Stereo TS finder for one stereo super-layer SL and one 2D track.
// The possible TS calculator turns the 2D track into a window of 10 TS IDs;
// the window is looked up in the TS map, and of the hit TSs the middle TS
// selector picks the one nearest the middle of the window, i.e. nearest the
// interaction point in z. The result is the related stereo TS: its global
// TS ID, raw TDC, LR and PR, together with phi_ax for the z0 fitter.
// The map holds only the half of the super-layer one 3DT sees (N_HALF[SL]
// TS, local IDs 0..N_HALF-1 starting at global ID HALF_OFFSET); window IDs
// outside that half count as not hit. The structure follows the paper
// (Fig. 4 of the original work); the half-ring addressing, the two-stage
// pipeline and the register boundaries are this design's choices.
// Timing: a track sampled at edge k gives its result after edge k + 2. The
// map is read at edge k + 1, so a hit must be in the map by then.
module stereo_ts_finder
  import tracker3d_pkg::*;
#(
  parameter int SL          = 0,
  parameter int HALF_OFFSET = 0
) (
  input  logic        clk,
  input  logic        rst,
  input  track2d_t    trk,
  input  ts_entry_t   map [N_HALF[SL]],
  output stereo_hit_t hit_out
);
  localparam int NF = N_FULL[SL];
  localparam int NH = N_HALF[SL];
  localparam int SEL_W = $clog2(WINDOW);

  // ---- stage 1: possible TS calculator
  logic [PHI_W-1:0] phi_ax_c, phi_ax_q;
  logic [ID_W-1:0]  win_c [WINDOW];
  logic [ID_W-1:0]  win_q [WINDOW];
  logic             vld_q;

  possible_ts_calculator #(.SL(SL)) u_calc (
    .trk(trk), .phi_ax(phi_ax_c), .win_id(win_c)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      vld_q    <= 1'b0;
      phi_ax_q <= '0;
      for (int k = 0; k < WINDOW; k++) win_q[k] <= '0;
    end else begin
      vld_q    <= trk.valid;
      phi_ax_q <= phi_ax_c;
      win_q    <= win_c;
    end
  end

  // ---- stage 2: look up the window in the TS map, pick the middle hit
  ts_entry_t        cand [WINDOW];
  logic [WINDOW-1:0] cand_hit;
  logic             found;
  logic [SEL_W-1:0] sel;

  always_comb begin
    for (int k = 0; k < WINDOW; k++) begin
      logic [ID_W:0] loc;
      loc = (ID_W+1)'(win_q[k]) + (ID_W+1)'(NF - HALF_OFFSET);
      if (loc >= (ID_W+1)'(NF)) loc = loc - (ID_W+1)'(NF);
      if (loc < (ID_W+1)'(NH)) cand[k] = map[loc[$clog2(NH)-1:0]];
      else                     cand[k] = '0;
      cand_hit[k] = cand[k].hit;
    end
  end

  middle_ts_selector #(.N(WINDOW)) u_sel (
    .hit(cand_hit), .found(found), .sel(sel)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      hit_out <= '0;
    end else begin
      hit_out.found  <= vld_q && found;
      hit_out.id     <= win_q[sel];
      hit_out.tdc    <= cand[sel].tdc;
      hit_out.lr     <= cand[sel].lr;
      hit_out.pr     <= cand[sel].pr;
      hit_out.phi_ax <= phi_ax_q;
    end
  end
endmodule
