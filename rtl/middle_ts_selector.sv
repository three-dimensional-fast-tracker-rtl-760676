// Middle TS selector of the stereo TS finder. Among the hit TSs of the
// window of N possible TSs it picks the one nearest the middle of the window,
// which is the TS whose z lies closest to the interaction point. Distance to
// the middle is |2k - (N-1)|; of two equally near TSs the lower index wins
// (this tie rule is this design's choice, the paper only says "near the
// middle"). Purely combinational.
// Interface: hit[k] is the hit flag of window position k; found is high when
// any TS is hit, and sel is then the chosen position.
module middle_ts_selector #(
  parameter int N = 10
) (
  input  logic [N-1:0]         hit,
  output logic                 found,
  output logic [$clog2(N)-1:0] sel
);
  always_comb begin
    found = 1'b0;
    sel   = '0;
    // scan from the far ends towards the middle; the last hit seen wins
    for (int d = N - 1; d >= 0; d--)
      for (int k = N - 1; k >= 0; k--)
        if (hit[k] && (2*k - (N-1) == d || (N-1) - 2*k == d)) begin
          found = 1'b1;
          sel   = ($clog2(N))'(k);
        end
  end
endmodule
