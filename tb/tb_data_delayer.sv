// Testbench of data_delayer: random data into a 5-deep and a 1-deep delayer;
// each output is compared, every clock, with the input of DEPTH clocks
// earlier, kept in a history of the testbench's own. Also checks that the
// chain comes out of reset cleared.
module tb_data_delayer;
  localparam int W = 12;
  logic clk = 0, rst = 1;
  logic [W-1:0] din, dout5, dout1;
  int checks = 0, failures = 0, cycle = 0;
  logic [W-1:0] hist [$];

  always #4 clk = ~clk;

  data_delayer #(.WIDTH(W), .DEPTH(5)) dut5 (.clk, .rst, .din, .dout(dout5));
  data_delayer #(.WIDTH(W), .DEPTH(1)) dut1 (.clk, .rst, .din, .dout(dout1));

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = '1;
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (dout5 !== '0 || dout1 !== '0) begin
      failures++; $display("FAIL reset: %h %h", dout5, dout1);
    end
    rst = 0;
    for (int n = 0; n < 200; n++) begin
      din = W'($urandom);
      hist.push_front(din);
      @(posedge clk); #1;
      // hist[0] was sampled at this edge
      checks++;
      if (dout1 !== hist[0]) begin failures++; $display("FAIL d1 n=%0d", n); end
      if (n >= 4) begin
        checks++;
        if (dout5 !== hist[4]) begin failures++; $display("FAIL d5 n=%0d %h %h", n, dout5, hist[4]); end
      end else begin
        checks++;
        if (dout5 !== '0) begin failures++; $display("FAIL d5 fill n=%0d", n); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
