// Testbench of middle_ts_selector: all 1024 hit patterns of a 10-TS window.
// The expected choice is found by ranking the positions by their distance
// from the window centre 4.5 (lower position first on a tie) and taking the
// first one that is hit.
module tb_middle_ts_selector;
  localparam int N = 10;
  logic [N-1:0] hit;
  logic         found;
  logic [3:0]   sel;
  int checks = 0, failures = 0;

  middle_ts_selector #(.N(N)) dut (.hit, .found, .sel);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // preference order 4,5,3,6,2,7,1,8,0,9
    int order [N] = '{4, 5, 3, 6, 2, 7, 1, 8, 0, 9};
    for (int p = 0; p < (1 << N); p++) begin
      int exp_sel;
      bit exp_found;
      hit = N'(p);
      #1;
      exp_found = 0; exp_sel = 0;
      for (int i = 0; i < N; i++)
        if (!exp_found && hit[order[i]]) begin exp_found = 1; exp_sel = order[i]; end
      checks++;
      if (found !== exp_found || (exp_found && sel !== 4'(exp_sel))) begin
        failures++;
        $display("FAIL hit=%b found=%0d sel=%0d exp %0d %0d", hit, found, sel, exp_found, exp_sel);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
