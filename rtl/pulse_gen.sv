// pulse_gen: parameterised pulse generator (up-converting processing element).
//
// A 72-bit pulse command names an envelope (start address and length in
// an envelope buffer), a frequency (index into a frequency buffer), a phase
// and an amplitude. The generator plays the envelope one complex point per
// DSP clock and multiplies it with the carrier from the dds:
//     dac[k] = amp * Re{ (envI + j envQ) * (cos th_k + j sin th_k) }
//            = amp * (envI*cos th_k - envQ*sin th_k)
// The same stored envelope is reused at any frequency, phase or amplitude,
// which is the point of parameterised pulses: only commands change between
// circuits, not waveform data. Used as qubit drive and as readout drive.
//
// The paper gives the complex multiplication, the 72-bit command and the
// I/Q envelope store. This design's choices: envelope word = {I[31:16],
// Q[15:0]} in Q1.15, one point per clock held for all SPC samples of that
// clock, unsigned 16-bit amplitude, frequency buffer of 32-bit phase steps,
// a command arriving while a pulse plays takes over at once.
//
// Timing: the first samples leave 8 clocks after cmd_valid and the pulse
// lasts env_len clocks; outside a pulse dac_o is 0. The carrier phase of a
// sample leaving at clock T is referenced to tcount at T (the dds is fed
// tcount + ADV to cover the pipeline).
// Local bus: env_we/env_re address envelope points, freq_we/freq_re
// address frequency words; lb_rdata/lb_rvalid answer reads one clock later.
module pulse_gen
  import qubic_pkg::*;
#(
  parameter int SPC        = 16,
  parameter int ENV_DEPTH  = 4096,
  parameter int FREQ_DEPTH = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  input  pulse_cmd_t  cmd,
  input  logic [31:0] tcount,
  // local bus
  input  logic        env_we,
  input  logic        env_re,
  input  logic        freq_we,
  input  logic        freq_re,
  input  logic [15:0] lb_addr,
  input  logic [31:0] lb_wdata,
  output logic [31:0] lb_rdata,
  output logic        lb_rvalid,
  // samples
  output sample_t     dac_o [SPC],
  output logic        active_o
);
  localparam int EAW = $clog2(ENV_DEPTH);
  localparam int FAW = $clog2(FREQ_DEPTH);
  localparam int ADV = DDS_LAT + 3;

  logic [15:0] p_amp;
  logic [16:0] p_phase;
  logic [11:0] p_addr, p_len;
  logic [FAW-1:0] p_freq, freq_addr;
  logic [31:0] fword_r;
  logic        ld1;
  logic [2:0]  st;
  logic        run;
  logic [EAW-1:0] ptr;
  logic [11:0] cnt;
  logic [3:0]  v;      // v[0]: env data valid, v[1]: M1, v[2]: M2, v[3]: out

  logic [31:0] env_word, freq_word;
  logic [31:0] env_lb_rdata, freq_lb_rdata;
  logic        env_lb_rvalid, freq_lb_rvalid;

  assign freq_addr = cmd_valid ? cmd.freq[FAW-1:0] : p_freq;

  lb_ram #(.DW(32), .DEPTH(ENV_DEPTH)) u_env (
    .clk, .a_we(env_we), .a_re(env_re), .a_addr(lb_addr[EAW-1:0]), .a_wdata(lb_wdata),
    .a_rdata(env_lb_rdata), .a_rvalid(env_lb_rvalid),
    .b_addr(ptr), .b_rdata(env_word));

  lb_ram #(.DW(32), .DEPTH(FREQ_DEPTH)) u_freq (
    .clk, .a_we(freq_we), .a_re(freq_re), .a_addr(lb_addr[FAW-1:0]), .a_wdata(lb_wdata),
    .a_rdata(freq_lb_rdata), .a_rvalid(freq_lb_rvalid),
    .b_addr(freq_addr), .b_rdata(freq_word));

  assign lb_rvalid = env_lb_rvalid | freq_lb_rvalid;
  assign lb_rdata  = env_lb_rvalid ? env_lb_rdata : freq_lb_rdata;

  sample_t cos_w [SPC];
  sample_t sin_w [SPC];

  dds #(.SPC(SPC)) u_dds (
    .clk, .fword(fword_r), .phase(p_phase), .tcount(tcount + 32'(ADV)),
    .cos_o(cos_w), .sin_o(sin_w));

  // command capture and envelope sequencing
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      p_amp <= '0; p_phase <= '0; p_addr <= '0; p_len <= '0; p_freq <= '0;
      fword_r <= '0; ld1 <= 1'b0; st <= '0; run <= 1'b0; ptr <= '0; cnt <= '0; v <= '0;
    end else begin
      ld1 <= cmd_valid;
      st  <= {st[1:0], cmd_valid};
      if (cmd_valid) begin
        p_amp   <= cmd.amp;
        p_phase <= cmd.phase;
        p_addr  <= cmd.env_addr;
        p_len   <= cmd.env_len;
        p_freq  <= cmd.freq[FAW-1:0];
      end
      if (ld1) fword_r <= freq_word;
      if (st[2]) begin
        run <= (p_len != 0);
        ptr <= p_addr[EAW-1:0];
        cnt <= p_len;
      end else if (run) begin
        ptr <= ptr + 1'b1;
        cnt <= cnt - 1'b1;
        run <= (cnt > 1);
      end
      v <= {v[2:0], run};
    end
  end

  // datapath
  logic signed [31:0] m_i [SPC];
  logic signed [31:0] m_q [SPC];
  sample_t            d_r [SPC];

  always_ff @(posedge clk) begin
    for (int k = 0; k < SPC; k++) begin
      m_i[k]   <= sample_t'(env_word[31:16]) * cos_w[k];
      m_q[k]   <= sample_t'(env_word[15:0])  * sin_w[k];
      d_r[k]   <= sat16(48'((48'(m_i[k]) - 48'(m_q[k])) >>> 15));
      dac_o[k] <= v[2] ? sample_t'((33'(d_r[k]) * $signed({1'b0, p_amp})) >>> 16) : '0;
    end
  end

  assign active_o = v[3];
endmodule
