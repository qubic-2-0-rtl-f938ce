// tb_state_disc: random points and calibrations against the shift-rotate
// model; |1> exactly when the rotated y is negative.
// Random I/Q values, shift points and rotation angles (Q1.15 cos/sin) go
// in on valid_i. One clock later, valid_o and state_o must match a model
// that computes y = (I-i0)*sin + (Q-q0)*cos in 64-bit integers. The
// y>0 / y<0 rule is the paper's; the coefficient format is this design's.
module tb_state_disc;
  logic clk = 0, rst_n = 0, valid_i = 0, valid_o, state_o;
  logic signed [31:0] i_i, q_i, i0, q0;
  logic signed [15:0] cos_c, sin_c;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  state_disc dut (.*);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      longint y;
      @(negedge clk);
      i_i = $signed($urandom) >>> 4; q_i = $signed($urandom) >>> 4;
      i0 = $signed($urandom) >>> 6;  q0 = $signed($urandom) >>> 6;
      cos_c = 16'($urandom); sin_c = 16'($urandom);
      if (n < 4) begin  // the paper's case: no shift, no rotation, decide on sign of Q
        i0 = 0; q0 = 0; cos_c = 16'sd32767; sin_c = 0;
        q_i = (n % 2) ? -1000 : 1000;
      end
      valid_i = 1;
      y = (longint'(i_i) - i0) * sin_c + (longint'(q_i) - q0) * cos_c;
      @(negedge clk);
      valid_i = 0;
      checks++;
      if (!valid_o || state_o != (y < 0)) begin
        failures++; $display("FAIL: n %0d state %0d y %0d", n, state_o, y);
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
