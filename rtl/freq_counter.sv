// freq_counter: measures one clock against a reference clock.
//
// A free-running binary counter runs in the measured domain and is carried
// to the reference domain in Gray code through two flip-flops. Every
// GATE_CYCLES reference cycles the difference between the current and the
// previous sampled value is stored in `count`: the number of meas_clk
// edges per gate, so f_meas = count * f_ref / GATE_CYCLES. `valid` pulses
// for one ref_clk cycle with each new result. The paper only says a
// frequency counter checks the generated clock frequencies; window length
// and Gray-code crossing are this design's choices.
module freq_counter #(
  parameter int GATE_CYCLES = 1024,
  parameter int CNT_W       = 32
) (
  input  logic             ref_clk,
  input  logic             ref_rst_n,
  input  logic             meas_clk,
  input  logic             meas_rst_n,
  output logic [CNT_W-1:0] count,
  output logic             valid
);
  logic [CNT_W-1:0] bin_m, gray_m;
  logic [CNT_W-1:0] gray_s1, gray_s2, bin_r, last_r;
  logic [$clog2(GATE_CYCLES+1)-1:0] gate;

  always_ff @(posedge meas_clk) begin
    if (!meas_rst_n) begin
      bin_m  <= '0;
      gray_m <= '0;
    end else begin
      bin_m  <= bin_m + 1'b1;
      gray_m <= (bin_m + 1'b1) ^ ((bin_m + 1'b1) >> 1);
    end
  end

  function automatic logic [CNT_W-1:0] gray2bin(input logic [CNT_W-1:0] g);
    logic [CNT_W-1:0] b;
    b[CNT_W-1] = g[CNT_W-1];
    for (int i = CNT_W-2; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  always_ff @(posedge ref_clk) begin
    if (!ref_rst_n) begin
      gray_s1 <= '0; gray_s2 <= '0; bin_r <= '0; last_r <= '0;
      gate <= '0; count <= '0; valid <= 1'b0;
    end else begin
      gray_s1 <= gray_m;
      gray_s2 <= gray_s1;
      bin_r   <= gray2bin(gray_s2);
      valid   <= 1'b0;
      if (gate == ($bits(gate))'(GATE_CYCLES - 1)) begin
        gate   <= '0;
        count  <= bin_r - last_r;
        last_r <= bin_r;
        valid  <= 1'b1;
      end else begin
        gate <= gate + 1'b1;
      end
    end
  end
endmodule
