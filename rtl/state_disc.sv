// state_disc: single-shot qubit state discriminator.
//
// An integrated readout point (I, Q) is first shifted by the calibrated
// centre (i0, q0) and then rotated so that the two state blobs lie on
// either side of the X axis. Only the rotated y coordinate is needed:
//     y = (I - i0) * sin_c + (Q - q0) * cos_c        (cos_c, sin_c in Q1.15)
// The state is |0> when y > 0 and |1> when y < 0, as in the paper's
// fast-reset experiment; y == 0 is taken as |0> (this design's choice).
// Parameters come from registers and can change between shots.
// Timing: state_o/valid_o are registered, one clock after valid_i; state_o
// hold the last decision until the next point.
module state_disc (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               valid_i,
  input  logic signed [31:0] i_i,
  input  logic signed [31:0] q_i,
  input  logic signed [31:0] i0,
  input  logic signed [31:0] q0,
  input  logic signed [15:0] cos_c,
  input  logic signed [15:0] sin_c,
  output logic               valid_o,
  output logic               state_o
);
  logic signed [32:0] di, dq;
  logic signed [49:0] y;

  always_comb begin
    di = 33'(i_i) - 33'(i0);
    dq = 33'(q_i) - 33'(q0);
    y  = 50'(di * sin_c) + 50'(dq * cos_c);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid_o <= 1'b0;
      state_o <= 1'b0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) state_o <= (y < 0);
    end
  end
endmodule
