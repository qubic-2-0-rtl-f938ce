// readout_conv: readout down-converter and integrator.
//
// The digitised readout signal x (SPC ADC samples per clock) is mixed with
// a digital local oscillator and summed over the readout window:
//     I = sum x_k * cos th_k / 2^15,   Q = -sum x_k * sin th_k / 2^15
// i.e. multiplication by exp(-j th), where th follows the same
// time-referenced dds as the drive generators. The sum is the low-pass
// filter that leaves the I/Q point of the qubit's readout tone. The
// command (same 72-bit format) supplies the LO frequency index and phase;
// env_len is the window length in clocks. The paper describes mixing and
// integrating over the readout pulse; the rectangular window, the command
// reuse and the scaling are this design's choices.
//
// Timing: the window opens 5 clocks after cmd_valid and lasts env_len
// clocks; iq_valid pulses 3 clocks after the window's last ADC clock.
// busy_o is high from cmd_valid until iq_valid (the function processor
// uses it to wait for a measurement in flight). mix_i_o carries the mixed
// I samples continuously, for the acquisition buffer.
module readout_conv
  import qubic_pkg::*;
#(
  parameter int SPC        = 4,
  parameter int FREQ_DEPTH = 512
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cmd_valid,
  input  pulse_cmd_t         cmd,
  input  logic [31:0]        tcount,
  input  sample_t            adc_i [SPC],
  // local bus (frequency buffer)
  input  logic               freq_we,
  input  logic               freq_re,
  input  logic [15:0]        lb_addr,
  input  logic [31:0]        lb_wdata,
  output logic [31:0]        lb_rdata,
  output logic               lb_rvalid,
  // results
  output logic               iq_valid,
  output logic signed [31:0] i_o,
  output logic signed [31:0] q_o,
  output logic               busy_o,
  output sample_t            mix_i_o [SPC]
);
  localparam int FAW = $clog2(FREQ_DEPTH);

  logic [16:0]    p_phase;
  logic [11:0]    p_len;
  logic [FAW-1:0] p_freq, freq_addr;
  logic [31:0]    fword_r, freq_word;
  logic           ld1, win, busy_r;
  logic [3:0]     st;
  logic [11:0]    cnt;
  logic [1:0]     w_v, w_first, w_last;

  assign freq_addr = cmd_valid ? cmd.freq[FAW-1:0] : p_freq;

  lb_ram #(.DW(32), .DEPTH(FREQ_DEPTH)) u_freq (
    .clk, .a_we(freq_we), .a_re(freq_re), .a_addr(lb_addr[FAW-1:0]), .a_wdata(lb_wdata),
    .a_rdata(lb_rdata), .a_rvalid(lb_rvalid),
    .b_addr(freq_addr), .b_rdata(freq_word));

  sample_t cos_w [SPC];
  sample_t sin_w [SPC];

  dds #(.SPC(SPC)) u_dds (
    .clk, .fword(fword_r), .phase(p_phase), .tcount(tcount + 32'(DDS_LAT)),
    .cos_o(cos_w), .sin_o(sin_w));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      p_phase <= '0; p_len <= '0; p_freq <= '0; fword_r <= '0;
      ld1 <= 1'b0; st <= '0; win <= 1'b0; cnt <= '0;
    end else begin
      ld1 <= cmd_valid;
      st  <= {st[2:0], cmd_valid};
      if (cmd_valid) begin
        p_phase <= cmd.phase;
        p_len   <= cmd.env_len;
        p_freq  <= cmd.freq[FAW-1:0];
      end
      if (ld1) fword_r <= freq_word;
      if (st[3]) begin
        win <= (p_len != 0);
        cnt <= p_len;
      end else if (win) begin
        cnt <= cnt - 1'b1;
        win <= (cnt > 1);
      end
    end
  end

  // mixing and integration
  logic signed [31:0] m_i [SPC];
  logic signed [31:0] m_q [SPC];
  logic signed [47:0] s_i, s_q, acc_i, acc_q, nxt_i, nxt_q;
  logic               first_clk;
  logic signed [47:0] s_sum_i, s_sum_q;

  assign first_clk = win && (cnt == p_len);

  always_ff @(posedge clk) begin
    for (int k = 0; k < SPC; k++) begin
      m_i[k]     <= adc_i[k] * cos_w[k];
      m_q[k]     <= -(adc_i[k] * sin_w[k]);
      mix_i_o[k] <= sample_t'((adc_i[k] * cos_w[k]) >>> 15);
    end
  end

  always_comb begin
    logic signed [47:0] a, b;
    a = '0; b = '0;
    for (int k = 0; k < SPC; k++) begin
      a = a + 48'(m_i[k]);
      b = b + 48'(m_q[k]);
    end
    nxt_i = (w_first[1] ? 48'sd0 : acc_i) + s_i;
    nxt_q = (w_first[1] ? 48'sd0 : acc_q) + s_q;
    s_sum_i = a;
    s_sum_q = b;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      w_v <= '0; w_first <= '0; w_last <= '0;
      acc_i <= '0; acc_q <= '0; iq_valid <= 1'b0; i_o <= '0; q_o <= '0; busy_r <= 1'b0;
    end else begin
      w_v     <= {w_v[0], win};
      w_first <= {w_first[0], first_clk};
      w_last  <= {w_last[0], win && (cnt == 12'd1)};
      s_i     <= s_sum_i;
      s_q     <= s_sum_q;
      iq_valid <= 1'b0;
      if (w_v[1]) begin
        acc_i <= nxt_i;
        acc_q <= nxt_q;
        if (w_last[1]) begin
          i_o      <= 32'(nxt_i >>> 15);
          q_o      <= 32'(nxt_q >>> 15);
          iq_valid <= 1'b1;
        end
      end
      if (cmd_valid && cmd.env_len != 0) busy_r <= 1'b1;
      else if (iq_valid)                 busy_r <= 1'b0;
    end
  end

  assign busy_o = busy_r | cmd_valid;
endmodule
