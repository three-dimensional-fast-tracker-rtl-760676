// Possible TS calculator of the stereo TS finder, for stereo super-layer SL.
// From the 2D track (charge, curvature rho, incident angle phi_i) it computes
// where the track would cross this super-layer if its wires were axial,
//     phi_ax = +-acos(r*rho/2) + phi_i -+ pi   (upper sign: positive charge),
// and turns phi_ax into a TS ID by multiplying with the SL's constant
// N_FULL/2pi. The window of WINDOW = 10 geometrically possible stereo TSs
// starts at that ID and runs towards the side the stereo wires are twisted to
// (increasing IDs for positive stereo angle, decreasing for negative).
// The formula, the ID conversion by a constant and the 10-TS window follow
// the paper; the one-sided window, the rounding to the nearest ID and the
// clamping of acos to 0 for a track that does not reach radius r are this
// design's choices. acos(r*rho/2) comes from a table indexed by rho.
// Purely combinational; the stereo TS finder registers its outputs.
module possible_ts_calculator
  import tracker3d_pkg::*;
#(
  parameter int SL = 0
) (
  input  track2d_t          trk,
  output logic [PHI_W-1:0]  phi_ax,
  output logic [ID_W-1:0]   win_id [WINDOW]   // global TS IDs of the window
);
  localparam int NF = N_FULL[SL];
  localparam logic [PHI_W-1:0] HALF_TURN = PHI_W'(1 << (PHI_W - 1));

  logic [PHI_W-1:0]    acos_rom [RHO_N];
  logic [PHI_W-1:0]    acos_v;

  always_comb
    for (int i = 0; i < RHO_N; i++) acos_rom[i] = acos_val(SL, i);
  logic [PHI_W+ID_W:0] prod;
  logic [ID_W:0]       id_c;
  logic [ID_W:0]       start;

  always_comb begin
    acos_v = acos_rom[trk.rho];
    if (!trk.charge) phi_ax = acos_v + trk.phi_i - HALF_TURN;
    else             phi_ax = -acos_v + trk.phi_i + HALF_TURN;

    // nearest TS ID: round(phi_ax * NF / 2^16) modulo NF
    prod = (PHI_W+ID_W+1)'(phi_ax) * (PHI_W+ID_W+1)'(NF) + (PHI_W+ID_W+1)'(HALF_TURN);
    id_c = prod[PHI_W +: ID_W+1];
    if (id_c >= (ID_W+1)'(NF)) id_c = id_c - (ID_W+1)'(NF);

    if (TAN_ST[SL] > 0.0) start = id_c;
    else if (id_c >= (ID_W+1)'(WINDOW - 1)) start = id_c - (ID_W+1)'(WINDOW - 1);
    else start = id_c + (ID_W+1)'(NF - (WINDOW - 1));

    for (int k = 0; k < WINDOW; k++) begin
      logic [ID_W:0] g;
      g = start + (ID_W+1)'(k);
      if (g >= (ID_W+1)'(NF)) g = g - (ID_W+1)'(NF);
      win_id[k] = g[ID_W-1:0];
    end
  end
endmodule
