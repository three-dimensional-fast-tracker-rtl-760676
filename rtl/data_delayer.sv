// Data delayer: a fixed-length shift register that delays a bus by DEPTH
// clocks. The 3DT uses it wherever one stream has to wait for a parallel
// processing path: TSF data waiting for the 2D fitter, event time and 2D
// fitter data waiting for the stereo TS finder, and the long event time path
// to the output. The paper shows these delayers by name only; a plain
// register chain, cleared by the synchronous reset so that delayed valid
// bits start low, is this design's choice.
// Interface: din is sampled every clock; dout = din of DEPTH clocks earlier.
// DEPTH = 0 makes the delayer a wire.
module data_delayer #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);
  if (DEPTH == 0) begin : g_wire
    assign dout = din;
  end else begin : g_chain
    logic [WIDTH-1:0] stage [DEPTH];
    always_ff @(posedge clk) begin
      if (rst) begin
        for (int i = 0; i < DEPTH; i++) stage[i] <= '0;
      end else begin
        stage[0] <= din;
        for (int i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
      end
    end
    assign dout = stage[DEPTH-1];
  end
endmodule
