// Testbench of ts_map_maker with the full map of SL1 (80 TS), the 33-clock
// latency and the 512 ns hold time. Frames of up to 10 random TSs arrive
// every 4th clock (32 ns at 8 ns per clock), sometimes repeating a TS ID so
// that an entry is refreshed before it expires, and with long pauses so that
// entries expire. A reference map, kept as "last frame that wrote the ID and
// its time", is compared with the whole map after every clock: this checks
// the 33-clock latency (an entry may not appear a clock early or late), the
// scatter by TS ID, the refresh and the erase after 64 clocks.
module tb_ts_map_maker;
  import tracker3d_pkg::*;
  localparam int N = 80;
  localparam int L = TS_MAP_LATENCY;
  localparam int H = HOLD_CLKS;
  localparam int NCYC = 3000;

  logic clk = 0, rst = 1;
  logic      in_valid;
  ts_in_t    frame [TS_PER_FRAME];
  ts_entry_t map   [N];

  // history of what was sampled at each clock edge
  logic   h_valid [NCYC];
  ts_in_t h_frame [NCYC][TS_PER_FRAME];
  ts_entry_t ref_e [N];
  int        ref_w [N];          // edge of the last write
  int checks = 0, failures = 0;
  int n_refresh = 0, n_expire = 0, n_first_seen = 0;

  always #4 clk = ~clk;

  ts_map_maker #(.N_TS(N)) dut (.clk, .rst, .in_valid, .frame, .map);

  initial begin
    #((NCYC + 200) * 8);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0;
    foreach (frame[j]) frame[j] = '0;
    foreach (ref_e[i]) begin ref_e[i] = '0; ref_w[i] = -1000000; end
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int e = 0; e < NCYC; e++) begin
      // drive the inputs sampled at edge e
      bit quiet;
      quiet = ((e / 400) % 3) == 2;         // pauses let entries expire
      in_valid = (e % CLK_PER_FRAME == 0) && !quiet;
      for (int j = 0; j < TS_PER_FRAME; j++) begin
        frame[j].valid = in_valid && ($urandom_range(0, 2) != 0);
        frame[j].id    = ID_W'($urandom_range(0, N + 3));   // some IDs beyond the map
        frame[j].tdc   = TDC_W'($urandom);
        frame[j].lr    = 2'($urandom);
        frame[j].pr    = 2'($urandom);
      end
      h_valid[e] = in_valid;
      h_frame[e] = frame;
      @(posedge clk);
      // reference update for edge e: frame sampled at edge e - (L - 1)
      if (e - (L - 1) >= 0 && h_valid[e - (L - 1)]) begin
        for (int j = 0; j < TS_PER_FRAME; j++) begin
          ts_in_t t;
          t = h_frame[e - (L - 1)][j];
          if (t.valid && int'(t.id) < N) begin
            if (e - ref_w[t.id] < H) n_refresh++;
            ref_e[t.id] = '{hit: 1'b1, tdc: t.tdc, lr: t.lr, pr: t.pr};
            ref_w[t.id] = e;
          end
        end
      end
      for (int i = 0; i < N; i++)
        if (ref_e[i].hit && e - ref_w[i] >= H) begin
          ref_e[i] = '0;
          n_expire++;
        end
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (map[i] !== ref_e[i]) begin
          failures++;
          if (failures < 10)
            $display("FAIL edge %0d id %0d: got %h exp %h", e, i, map[i], ref_e[i]);
        end
      end
      if (e == L - 1 && h_valid[0]) n_first_seen++;
    end
    // the first frame (sampled at edge 0) must show up exactly at edge L-1
    checks++;
    if (n_refresh == 0 || n_expire == 0) begin
      failures++;
      $display("FAIL mechanisms not exercised: refresh=%0d expire=%0d", n_refresh, n_expire);
    end
    $display("refreshes=%0d expiries=%0d", n_refresh, n_expire);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
