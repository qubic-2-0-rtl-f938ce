// tb_rdrv_combiner: random sums with saturation, one clock latency.
// Three readout-drive inputs of two samples each carry random values,
// biased so that many sums overflow 16 bits. Every output sample must be
// the saturated sum of the inputs one clock earlier. Summing readout
// drives onto one DAC is the paper's; saturation and the one-clock
// register are this design's.
module tb_rdrv_combiner;
  import qubic_pkg::*;
  localparam int N = 3, SPC = 2;
  logic clk = 0;
  sample_t din [N][SPC];
  sample_t dout [SPC];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  rdrv_combiner #(.N(N), .SPC(SPC)) dut (.*);

  initial begin
    for (int t = 0; t < 300; t++) begin
      int e [SPC];
      @(negedge clk);
      for (int k = 0; k < SPC; k++) begin
        e[k] = 0;
        for (int n = 0; n < N; n++) begin
          din[n][k] = (t % 2) ? sample_t'($urandom) : sample_t'($signed($urandom) >>> 19);
          e[k] += int'(din[n][k]);
        end
        if (e[k] > 32767) e[k] = 32767;
        if (e[k] < -32768) e[k] = -32768;
      end
      @(negedge clk);
      for (int k = 0; k < SPC; k++) begin
        checks++;
        if (int'(dout[k]) != e[k]) begin failures++; $display("FAIL: %0d vs %0d", dout[k], e[k]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
