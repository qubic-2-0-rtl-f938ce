// dsp: the real-time part of the gateware, one processor core per qubit.
//
// For each qubit q there is a processor core, a qubit-drive generator
// (own DAC), a readout-drive generator (summed with the other qubits'
// onto one readout DAC), a readout down-converter on the shared ADC, a
// state discriminator and an accumulation buffer. The cores share a
// function processor, which returns discriminated states to any core
// (feedback and feed-forward), and a sync barrier. One acquisition buffer
// records raw ADC (either channel), mixed (digital LO) or readout DAC
// samples.
// A core's pulse command goes to its own qubit's generator named by
// cmd.elem (QDRV, RDRV, RDLO). All generators share one free-running
// time counter, so carriers are phase coherent across pulses and qubits.
//
// The block structure follows the paper (cores, processing elements,
// command / envelope / accumulation / acquisition buffers, function
// processor, sync); the address maps below are this design's.
//
// Register bus (lb_dsp, word addresses):
//   0x000 W: bit q = start core q        R: [15:0] done, [31:16] running
//   0x001 W: bit0 trigger acquisition, bits 2:1 source (0 ADC, 1 mixed I
//            of qubit bits 7:4, 2 readout DAC, 3 second ADC)   R: bit0 busy
//   0x002 W: bit q = clear accumulation buffer q
//   0x003 R: time counter
//   0x010 + 4q + {0,1,2}: discriminator i0, q0, {cos[31:16], sin[15:0]}
//   0x100 + q R: accumulation buffer q entry count
// Memory bus (lb_bram): addr[23:20] region, [19:16] qubit, [15:0] offset
//   0 command buffer (instr*4 + lane, lane 0 = bits 31:0)
//   1 qubit-drive envelope   2 readout-drive envelope  ({I,Q} per word)
//   3 qubit-drive frequency  4 readout-drive frequency  5 readout LO frequency
//   6 accumulation buffer (2n: I, 2n+1: Q)
//   7 acquisition buffer (qubit field 0): entry n, 32-bit lane l at
//     n*DSPC/2 + l (one DAC word per entry; ADC and mixed entries fill the
//     low ASPC samples, the rest is zero)
// Reads answer with rvalid one or two clocks after rd.
module dsp
  import qubic_pkg::*;
#(
  parameter int NQ         = 15,
  parameter int DSPC       = DAC_SPC,
  parameter int ASPC       = ADC_SPC,
  parameter int PROG_DEPTH = 1024,
  parameter int ENV_DEPTH  = 4096,
  parameter int FREQ_DEPTH = 512,
  parameter int ACC_DEPTH  = 1024,
  parameter int ACQ_DEPTH  = 1024
) (
  input  logic    clk,
  input  logic    rst_n,
  input  lb_req_t lb_dsp_req,
  output lb_rsp_t lb_dsp_rsp,
  input  lb_req_t lb_bram_req,
  output lb_rsp_t lb_bram_rsp,
  input  sample_t adc_i  [ASPC],
  input  sample_t adc1_i [ASPC],    // second ADC channel, acquisition only
  output sample_t qdrv_o [NQ][DSPC],
  output sample_t rdrv_o [DSPC],
  // status, for monitoring
  output logic [NQ-1:0] meas_valid_o,
  output logic [NQ-1:0] meas_state_o
);
  logic [31:0] tcount;
  always_ff @(posedge clk) begin
    if (!rst_n) tcount <= '0;
    else        tcount <= tcount + 1'b1;
  end

  localparam int QSW = (NQ > 1) ? $clog2(NQ) : 1;
  // ---------------- register bus decode ----------------
  logic [NQ-1:0] start, done, running, acc_clear;
  logic [NQ-1:0][31:0] d_i0, d_q0, d_rot;
  logic acq_trig, acq_busy;
  logic [QSW-1:0] acq_q;
  logic [NQ-1:0][31:0] acc_count;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      d_i0 <= '0; d_q0 <= '0; d_rot <= '0; acq_q <= '0;
      lb_dsp_rsp <= '0;
    end else begin
      lb_dsp_rsp.rvalid <= lb_dsp_req.rd;
      if (lb_dsp_req.wr) begin
        if (lb_dsp_req.addr == 24'h001) begin
          acq_q <= (32'(lb_dsp_req.wdata[7:4]) < NQ) ? QSW'(lb_dsp_req.wdata[7:4]) : '0;
        end
        for (int q = 0; q < NQ; q++) begin
          if (lb_dsp_req.addr == 24'(16 + 4*q))     d_i0[q]  <= lb_dsp_req.wdata;
          if (lb_dsp_req.addr == 24'(16 + 4*q + 1)) d_q0[q]  <= lb_dsp_req.wdata;
          if (lb_dsp_req.addr == 24'(16 + 4*q + 2)) d_rot[q] <= lb_dsp_req.wdata;
        end
      end
      if (lb_dsp_req.rd) begin
        lb_dsp_rsp.rdata <= '0;
        if (lb_dsp_req.addr == 24'h000) lb_dsp_rsp.rdata <= {16'(running), 16'(done)};
        if (lb_dsp_req.addr == 24'h001) lb_dsp_rsp.rdata <= 32'(acq_busy);
        if (lb_dsp_req.addr == 24'h003) lb_dsp_rsp.rdata <= tcount;
        for (int q = 0; q < NQ; q++) begin
          if (lb_dsp_req.addr == 24'(16 + 4*q))     lb_dsp_rsp.rdata <= d_i0[q];
          if (lb_dsp_req.addr == 24'(16 + 4*q + 1)) lb_dsp_rsp.rdata <= d_q0[q];
          if (lb_dsp_req.addr == 24'(16 + 4*q + 2)) lb_dsp_rsp.rdata <= d_rot[q];
          if (lb_dsp_req.addr == 24'(256 + q))      lb_dsp_rsp.rdata <= acc_count[q];
        end
      end
    end
  end

  assign start     = (lb_dsp_req.wr && lb_dsp_req.addr == 24'h000) ? lb_dsp_req.wdata[NQ-1:0] : '0;
  assign acc_clear = (lb_dsp_req.wr && lb_dsp_req.addr == 24'h002) ? lb_dsp_req.wdata[NQ-1:0] : '0;
  assign acq_trig  = lb_dsp_req.wr && lb_dsp_req.addr == 24'h001 && lb_dsp_req.wdata[0];

  // ---------------- memory bus decode ----------------
  logic [3:0]  m_reg;
  logic [3:0]  m_q;
  logic [15:0] m_off;
  assign m_reg = lb_bram_req.addr[23:20];
  assign m_q   = lb_bram_req.addr[19:16];
  assign m_off = lb_bram_req.addr[15:0];

  function automatic logic sel(input logic [3:0] r, input logic [3:0] want_r,
                               input logic [3:0] qq, input int want_q);
    return (r == want_r) && (32'(qq) == want_q);
  endfunction

  // ---------------- per-qubit datapath ----------------
  logic [NQ-1:0]             c_valid;
  pulse_cmd_t                c_cmd [NQ];
  logic [NQ-1:0]             f_req, f_ack, s_req, s_rel;
  logic [NQ-1:0][7:0]        f_id;
  logic [NQ-1:0][31:0]       f_data;
  logic [NQ-1:0][NQ-1:0]     s_mask;
  logic [NQ-1:0]             iq_valid, ro_busy;
  logic signed [31:0]        iq_i [NQ];
  logic signed [31:0]        iq_q [NQ];
  sample_t                   rd_samples [NQ][DSPC];
  sample_t                   mix_i [NQ][ASPC];
  logic [NQ-1:0][5:0][31:0]  rsp_data;
  logic [NQ-1:0][5:0]        rsp_valid;

  for (genvar q = 0; q < NQ; q++) begin : g_q
    logic       qd_v, rd_v, lo_v;
    logic       unused_active_q, unused_active_r;
    logic [31:0] unused_qclk;

    proc_core #(.NC(NQ), .PROG_DEPTH(PROG_DEPTH)) u_core (
      .clk, .rst_n, .start(start[q]),
      .prog_we(lb_bram_req.wr && sel(m_reg, 4'd0, m_q, q)),
      .prog_re(lb_bram_req.rd && sel(m_reg, 4'd0, m_q, q)),
      .prog_addr(m_off[$clog2(PROG_DEPTH)+1:0]), .prog_wdata(lb_bram_req.wdata),
      .prog_rdata(rsp_data[q][0]), .prog_rvalid(rsp_valid[q][0]),
      .cmd_valid(c_valid[q]), .cmd(c_cmd[q]),
      .fproc_req(f_req[q]), .fproc_id(f_id[q]), .fproc_ack(f_ack[q]), .fproc_data(f_data[q]),
      .sync_req(s_req[q]), .sync_mask(s_mask[q]), .sync_release(s_rel[q]),
      .qclk_o(unused_qclk), .done_o(done[q]), .running_o(running[q]));

    assign qd_v = c_valid[q] && c_cmd[q].elem == ELEM_QDRV;
    assign rd_v = c_valid[q] && c_cmd[q].elem == ELEM_RDRV;
    assign lo_v = c_valid[q] && c_cmd[q].elem == ELEM_RDLO;

    pulse_gen #(.SPC(DSPC), .ENV_DEPTH(ENV_DEPTH), .FREQ_DEPTH(FREQ_DEPTH)) u_qdrv (
      .clk, .rst_n, .cmd_valid(qd_v), .cmd(c_cmd[q]), .tcount,
      .env_we(lb_bram_req.wr && sel(m_reg, 4'd1, m_q, q)),
      .env_re(lb_bram_req.rd && sel(m_reg, 4'd1, m_q, q)),
      .freq_we(lb_bram_req.wr && sel(m_reg, 4'd3, m_q, q)),
      .freq_re(lb_bram_req.rd && sel(m_reg, 4'd3, m_q, q)),
      .lb_addr(m_off), .lb_wdata(lb_bram_req.wdata),
      .lb_rdata(rsp_data[q][1]), .lb_rvalid(rsp_valid[q][1]),
      .dac_o(qdrv_o[q]), .active_o(unused_active_q));

    pulse_gen #(.SPC(DSPC), .ENV_DEPTH(ENV_DEPTH), .FREQ_DEPTH(FREQ_DEPTH)) u_rdrv (
      .clk, .rst_n, .cmd_valid(rd_v), .cmd(c_cmd[q]), .tcount,
      .env_we(lb_bram_req.wr && sel(m_reg, 4'd2, m_q, q)),
      .env_re(lb_bram_req.rd && sel(m_reg, 4'd2, m_q, q)),
      .freq_we(lb_bram_req.wr && sel(m_reg, 4'd4, m_q, q)),
      .freq_re(lb_bram_req.rd && sel(m_reg, 4'd4, m_q, q)),
      .lb_addr(m_off), .lb_wdata(lb_bram_req.wdata),
      .lb_rdata(rsp_data[q][2]), .lb_rvalid(rsp_valid[q][2]),
      .dac_o(rd_samples[q]), .active_o(unused_active_r));

    readout_conv #(.SPC(ASPC), .FREQ_DEPTH(FREQ_DEPTH)) u_rdlo (
      .clk, .rst_n, .cmd_valid(lo_v), .cmd(c_cmd[q]), .tcount, .adc_i,
      .freq_we(lb_bram_req.wr && sel(m_reg, 4'd5, m_q, q)),
      .freq_re(lb_bram_req.rd && sel(m_reg, 4'd5, m_q, q)),
      .lb_addr(m_off), .lb_wdata(lb_bram_req.wdata),
      .lb_rdata(rsp_data[q][3]), .lb_rvalid(rsp_valid[q][3]),
      .iq_valid(iq_valid[q]), .i_o(iq_i[q]), .q_o(iq_q[q]), .busy_o(ro_busy[q]),
      .mix_i_o(mix_i[q]));

    state_disc u_disc (
      .clk, .rst_n, .valid_i(iq_valid[q]), .i_i(iq_i[q]), .q_i(iq_q[q]),
      .i0(d_i0[q]), .q0(d_q0[q]), .cos_c(d_rot[q][31:16]), .sin_c(d_rot[q][15:0]),
      .valid_o(meas_valid_o[q]), .state_o(meas_state_o[q]));

    acc_buffer #(.DEPTH(ACC_DEPTH)) u_acc (
      .clk, .rst_n, .clear(acc_clear[q]), .valid_i(iq_valid[q]), .i_i(iq_i[q]), .q_i(iq_q[q]),
      .lb_re(lb_bram_req.rd && sel(m_reg, 4'd6, m_q, q)),
      .lb_addr(m_off[$clog2(ACC_DEPTH):0]),
      .lb_rdata(rsp_data[q][4]), .lb_rvalid(rsp_valid[q][4]), .count(acc_count[q]));

    assign rsp_data[q][5]  = '0;
    assign rsp_valid[q][5] = 1'b0;
  end

  fproc #(.NC(NQ), .NQ(NQ)) u_fproc (
    .clk, .rst_n, .meas_valid(meas_valid_o), .meas_state(meas_state_o), .meas_busy(ro_busy),
    .req(f_req), .id(f_id), .ack(f_ack), .data(f_data));

  sync_barrier #(.NC(NQ)) u_sync (
    .clk, .rst_n, .req(s_req), .mask(s_mask), .release_o(s_rel));

  rdrv_combiner #(.N(NQ), .SPC(DSPC)) u_comb (.clk, .din(rd_samples), .dout(rdrv_o));

  // acquisition buffer sources, one DAC word (DSPC samples) wide: ADC
  // samples, mixed I of qubit acq_q, second-ADC samples (these three in
  // the low ASPC samples, rest zero) and all readout DAC samples
  localparam int AQW = DSPC * 16;
  logic [3:0][AQW-1:0] acq_src;
  logic [31:0] acq_rdata;
  logic        acq_rvalid;
  always_comb begin
    acq_src = '0;
    for (int k = 0; k < ASPC; k++) begin
      acq_src[0][k*16 +: 16] = adc_i[k];
      acq_src[1][k*16 +: 16] = mix_i[acq_q][k];
      acq_src[3][k*16 +: 16] = adc1_i[k];
    end
    for (int k = 0; k < DSPC; k++) acq_src[2][k*16 +: 16] = rdrv_o[k];
  end

  acq_buffer #(.DW(AQW), .NSRC(4), .DEPTH(ACQ_DEPTH)) u_acq (
    .clk, .rst_n, .trigger(acq_trig), .sel(lb_dsp_req.wdata[2:1]), .src(acq_src), .busy(acq_busy),
    .lb_re(lb_bram_req.rd && sel(m_reg, 4'd7, m_q, 0)),
    .lb_addr(m_off[$clog2(ACQ_DEPTH)+$clog2(AQW/32)-1:0]),
    .lb_rdata(acq_rdata), .lb_rvalid(acq_rvalid));

  // read-back merge: exactly one slave answers a read
  always_comb begin
    lb_bram_rsp.rvalid = acq_rvalid;
    lb_bram_rsp.rdata  = acq_rvalid ? acq_rdata : '0;
    for (int q = 0; q < NQ; q++)
      for (int s = 0; s < 6; s++)
        if (rsp_valid[q][s]) begin
          lb_bram_rsp.rvalid = 1'b1;
          lb_bram_rsp.rdata  = lb_bram_rsp.rdata | rsp_data[q][s];
        end
  end
endmodule
