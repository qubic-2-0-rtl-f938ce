// rdrv_combiner: frequency-multiplexed readout drive.
//
// All qubits' readout drive generators share one DAC: their sample
// streams, each on its own readout frequency, are added sample by sample
// and saturated to 16 bits. The paper states that readout drive outputs
// are combined onto a single DAC; saturation (rather than scaling) is this
// design's choice, the generators' amplitudes are expected to leave room.
// Timing: one register, output one clock after the inputs.
module rdrv_combiner
  import qubic_pkg::*;
#(
  parameter int N   = 15,
  parameter int SPC = 16
) (
  input  logic    clk,
  input  sample_t din  [N][SPC],
  output sample_t dout [SPC]
);
  always_ff @(posedge clk) begin
    for (int k = 0; k < SPC; k++) begin
      logic signed [47:0] s;
      s = '0;
      for (int n = 0; n < N; n++) s = s + 48'(din[n][k]);
      dout[k] <= sat16(s);
    end
  end
endmodule
