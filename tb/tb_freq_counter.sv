// tb_freq_counter: ref 100 MHz, measured 250 MHz, 40-cycle gate -> 100 counts.
// The two clocks are independent `always` toggles, so the Gray-code
// crossing is exercised with a real phase relationship. After both resets
// release, each `valid` pulse must carry 100 +/- 1 (one edge of
// uncertainty from the crossing). The gate is shortened from its default
// of 1024 reference cycles to keep the run short. The frequency counter is
// named in the paper; gate length and tolerance are this design's.
module tb_freq_counter;
  logic ref_clk = 0, meas_clk = 0, ref_rst_n = 0, meas_rst_n = 0;
  logic [31:0] count;
  logic valid;
  int checks = 0, failures = 0, nres = 0;
  always #5 ref_clk = ~ref_clk;
  always #2 meas_clk = ~meas_clk;
  freq_counter #(.GATE_CYCLES(40), .CNT_W(32)) dut (.ref_clk, .ref_rst_n, .meas_clk, .meas_rst_n, .count, .valid);

  initial begin
    #33 ref_rst_n = 1; meas_rst_n = 1;
    while (nres < 6) begin
      @(posedge ref_clk); #1;
      if (valid) begin
        nres++;
        if (nres > 2) begin   // first windows include the start-up
          checks++;
          if (count < 99 || count > 101) begin
            failures++; $display("FAIL: count %0d, expected 100", count);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge ref_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
