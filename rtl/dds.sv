// dds: parallel-sample direct digital synthesiser (carrier generator).
//
// The DAC takes SPC samples per DSP clock, so the carrier is produced SPC
// samples at a time. Sample k of the clock whose time counter is t has
// phase
//     theta_k = fword * (SPC*t + k) + (phase << 15)      (32-bit wrap)
// i.e. the phase is a function of absolute time, not of when a pulse
// started, so every pulse of the same frequency is phase coherent and a
// phase step is just a change of `phase`. fword is the phase step per
// sample (f = fword * fs / 2^32). The top LUT_BITS bits of theta_k index a
// cosine table (qubic_pkg::COS_LUT, Q1.15); sine is the cosine a quarter
// turn earlier. The paper states DDS-based generation; the time-referenced
// phase and the table resolution are this design's choices.
// Timing: cos_o/sin_o are registered, DDS_LAT = 3 clocks after the inputs.
module dds
  import qubic_pkg::*;
#(
  parameter int SPC = 16
) (
  input  logic        clk,
  input  logic [31:0] fword,
  input  logic [16:0] phase,
  input  logic [31:0] tcount,
  output sample_t     cos_o [SPC],
  output sample_t     sin_o [SPC]
);
  localparam logic [LUT_BITS-1:0] QUARTER = LUT_BITS'(2**(LUT_BITS-2));

  logic [31:0] base_r;
  logic [31:0] offs_r [SPC];
  logic [31:0] theta_r [SPC];

  always_ff @(posedge clk) begin
    base_r <= 32'(fword * 32'(SPC) * tcount) + {phase, 15'b0};
    for (int k = 0; k < SPC; k++) begin
      offs_r[k]  <= 32'(fword * 32'(k));
      theta_r[k] <= base_r + offs_r[k];
      cos_o[k]   <= cos_lut(theta_r[k][31 -: LUT_BITS]);
      sin_o[k]   <= cos_lut(theta_r[k][31 -: LUT_BITS] - QUARTER);
    end
  end
endmodule
