// TS map maker for one stereo track segment finder (TSF).
// Every 32 ns frame the TSF reports up to TS_PER_FRAME = 10 track segments,
// each with its TS ID, raw TDC, left/right (LR) and priority layer (PR). The
// map maker scatters them into the TS map, an array of N_TS entries indexed by
// TS ID, and integrates over time: an entry written by a new TS restarts its
// age counter, and an entry whose counter reaches HOLD_CLKS is erased. Thus a
// hit stays visible for HOLD_CLKS clocks after its last report, long enough to
// cover the more than 500 ns drift time of the chamber.
// Following the paper: the frame of 10 TS, the map indexed by TS ID holding
// raw TDC + LR + PR, the counter reset on a new hit and erase on expiry, the
// map sizes 80/112/144/176 and the latency of 33 clocks of 8 ns from input
// frame to map output. This design's choices: the hold time (512 ns), that a
// later slot of the same frame wins when two slots carry the same TS ID, that
// TS IDs outside the map are ignored, and that the latency is made up by a
// delayer on the narrow input side followed by a single map register.
// Interface: in_valid marks a clock carrying a frame (one clock in four at
// 125 MHz); map[i] is the entry of TS ID i, map[i].hit its hit flag.
// Timing: a frame sampled at clock edge k is in map after edge k + LATENCY.
module ts_map_maker
  import tracker3d_pkg::*;
#(
  parameter int N_TS      = 80,
  parameter int LATENCY   = TS_MAP_LATENCY,
  parameter int HOLD      = HOLD_CLKS
) (
  input  logic      clk,
  input  logic      rst,
  input  logic      in_valid,
  input  ts_in_t    frame [TS_PER_FRAME],
  output ts_entry_t map   [N_TS]
);
  localparam int FRAME_W = 1 + TS_PER_FRAME * $bits(ts_in_t);
  localparam int CNT_W   = $clog2(HOLD + 1);

  // ---- input alignment: LATENCY - 1 clocks on the 10-TS frame
  logic [FRAME_W-1:0] frame_bits, frame_dly;
  logic               dly_valid;
  ts_in_t             dly_frame [TS_PER_FRAME];

  always_comb begin
    frame_bits[FRAME_W-1] = in_valid;
    for (int j = 0; j < TS_PER_FRAME; j++)
      frame_bits[j*$bits(ts_in_t) +: $bits(ts_in_t)] = frame[j];
  end

  data_delayer #(.WIDTH(FRAME_W), .DEPTH(LATENCY - 1)) u_in_dly (
    .clk, .rst, .din(frame_bits), .dout(frame_dly)
  );

  always_comb begin
    dly_valid = frame_dly[FRAME_W-1];
    for (int j = 0; j < TS_PER_FRAME; j++)
      dly_frame[j] = frame_dly[j*$bits(ts_in_t) +: $bits(ts_in_t)];
  end

  // ---- the map: scatter by TS ID, age counters, erase on expiry
  logic [CNT_W-1:0] age [N_TS];

  for (genvar i = 0; i < N_TS; i++) begin : g_entry
    logic      wr;
    ts_entry_t wdata;
    always_comb begin
      wr    = 1'b0;
      wdata = '0;
      if (dly_valid)
        for (int j = 0; j < TS_PER_FRAME; j++)
          if (dly_frame[j].valid && dly_frame[j].id == ID_W'(i)) begin
            wr    = 1'b1;
            wdata = '{hit: 1'b1, tdc: dly_frame[j].tdc,
                      lr: dly_frame[j].lr, pr: dly_frame[j].pr};
          end
    end

    always_ff @(posedge clk) begin
      if (rst) begin
        map[i] <= '0;
        age[i] <= '0;
      end else if (wr) begin
        map[i] <= wdata;
        age[i] <= '0;
      end else if (map[i].hit) begin
        if (age[i] == CNT_W'(HOLD - 1)) begin
          map[i] <= '0;
          age[i] <= '0;
        end else begin
          age[i] <= age[i] + 1'b1;
        end
      end
    end
  end
endmodule
