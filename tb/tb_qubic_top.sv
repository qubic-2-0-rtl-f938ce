// tb_qubic_top: end-to-end run of the full-size design (default
// parameters: 15 qubits on 16 DACs, 16 DAC samples and 4 ADC samples per clock).
//
// Everything goes through the AXI4-Lite ports as software would: envelopes,
// frequencies, discriminator settings and two core programs are loaded,
// then the conditional bit flip of two qubits is run for several shots:
//   core 0: X90 on Q0, measure Q0 (mid-circuit), sync, measure Q0
//   core 1: wait, branch on Q0's result through the function processor:
//           if |1> two X90 on Q1; sync; measure Q1
// The final readouts of Q0 and Q1 run at the same time on the shared
// readout DAC (frequency-multiplexed) and must agree: |00> or |11>.
// A behavioural two-qubit model drives the ADC stream: a qubit-drive pulse
// is a quarter turn, a readout drive pulse measures (random on the
// equator) and adds a tone at that qubit's readout frequency with +90
// degrees phase for |0> and -90 degrees for |1>. Both qubits relax to |0>
// between shots, as after the wait between repetitions.
// Besides the results, the test counts how often each mechanism happened
// and fails any that never did: sync release, function-processor stall,
// feed-forward branch taken and not taken, idle wait, multiplexed
// readout, accumulation, acquisition capture, DAC underrun and ADC gap
// counting, clock-frequency measurement, PTP stamps and an AXI read
// timeout.
module tb_qubic_top;
  import qubic_pkg::*;
  import qubic_asm_pkg::*;
  localparam int NQ = 15, DSPC = DAC_SPC, ASPC = ADC_SPC;
  localparam int SHOTS = 6;
  localparam logic [31:0] FW_R0 = 32'h0400_0000, FW_R1 = 32'h0800_0000;  // per DAC sample

  logic clk = 0, ref_clk = 0, arst_n = 0;
  axil_req_t s_axil_req [3];
  axil_rsp_t s_axil_rsp [3];
  logic [NQ:0][DSPC*16-1:0] m_axis_dac_tdata;
  logic [NQ:0] m_axis_dac_tvalid, m_axis_dac_tready = '1;
  logic [1:0][ASPC*16-1:0] s_axis_adc_tdata = '0;
  logic [1:0] s_axis_adc_tvalid = '1, s_axis_adc_tready;
  logic ptp_tx_stb = 0, ptp_rx_stb = 0, ptp_msg_delay_req = 0;
  logic [NQ-1:0] meas_valid_o, meas_state_o;
  int checks = 0, failures = 0, cyc = 0;
  always #1 clk = ~clk;         // 500 MHz
  always #4 ref_clk = ~ref_clk; // 125 MHz
  always @(posedge clk) cyc <= cyc + 1;

  qubic_top dut (.*);

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  // ---------------- AXI4-Lite master ----------------
  task automatic axi_wr(input int p, input logic [31:0] a, input logic [31:0] d);
    @(negedge clk);
    s_axil_req[p].awvalid = 1; s_axil_req[p].awaddr = a;
    s_axil_req[p].wvalid = 1;  s_axil_req[p].wdata = d; s_axil_req[p].wstrb = '1;
    s_axil_req[p].bready = 1;
    do @(negedge clk); while (!s_axil_rsp[p].awready);
    s_axil_req[p].awvalid = 0; s_axil_req[p].wvalid = 0;
    do @(negedge clk); while (!s_axil_rsp[p].bvalid);
    @(negedge clk);
  endtask

  task automatic axi_rd(input int p, input logic [31:0] a, output logic [31:0] d, output logic [1:0] r);
    @(negedge clk);
    s_axil_req[p].arvalid = 1; s_axil_req[p].araddr = a; s_axil_req[p].rready = 1;
    do @(negedge clk); while (!s_axil_rsp[p].arready);
    s_axil_req[p].arvalid = 0;
    do @(negedge clk); while (!s_axil_rsp[p].rvalid);
    d = s_axil_rsp[p].rdata; r = s_axil_rsp[p].rresp;
    @(negedge clk);
  endtask

  function automatic logic [31:0] bram(input int region, input int q, input int off);
    return {6'b0, 4'(region), 4'(q), 16'(off), 2'b00};
  endfunction

  task automatic load(input int q, input instr_t p [], input int n);
    for (int i = 0; i < n; i++)
      for (int l = 0; l < 4; l++) axi_wr(1, bram(0, q, i*4 + l), p[i][l*32 +: 32]);
  endtask

  // ---------------- behavioural two-qubit device ----------------
  int quarter [2] = '{0, 0};
  int ro_phase [2] = '{32768, 32768};
  bit qd_prev [2] = '{0, 0};
  bit ro_prev [2] = '{0, 0};
  int n_x90 [2] = '{0, 0};
  int n_mux = 0;

  function automatic bit dac_nz(input int ch);
    return m_axis_dac_tdata[ch] != '0;
  endfunction

  always @(negedge clk) begin
    bit qa [2], ra [2];
    int idx;
    qa[0] = dac_nz(0); qa[1] = dac_nz(1);
    ra[0] = dut.u_dsp.g_q[0].u_rdrv.active_o;
    ra[1] = dut.u_dsp.g_q[1].u_rdrv.active_o;
    if (ra[0] && ra[1]) n_mux++;
    for (int q = 0; q < 2; q++) if (arst_n) begin
      if (qa[q] && !qd_prev[q]) begin quarter[q] = (quarter[q] + 1) % 4; n_x90[q]++; end
      if (ra[q] && !ro_prev[q]) begin
        int outcome;
        if (quarter[q] % 2 == 1) outcome = int'($urandom_range(1));
        else outcome = (quarter[q] == 2) ? 1 : 0;
        quarter[q] = outcome ? 2 : 0;
        ro_phase[q] = outcome ? 98304 : 32768;
      end
      qd_prev[q] = qa[q]; ro_prev[q] = ra[q];
    end
    // ADC words driven now reach the DSP on the next clock
    for (int k = 0; k < ASPC; k++) begin
      int c0, s0, c1, s1, x;
      ref_carrier(longint'(FW_R0) * 4, ro_phase[0], longint'(dut.u_dsp.tcount) + 1, ASPC, k, c0, s0);
      ref_carrier(longint'(FW_R1) * 4, ro_phase[1], longint'(dut.u_dsp.tcount) + 1, ASPC, k, c1, s1);
      x = (ra[0] ? (6000 * c0) >>> 15 : 0) + (ra[1] ? (6000 * c1) >>> 15 : 0);
      s_axis_adc_tdata[0][k*16 +: 16] = 16'(x);
      s_axis_adc_tdata[1][k*16 +: 16] = 16'h5A00 + 16'(k);   // second channel: fixed pattern
    end
  end

  // ---------------- mechanism counters ----------------
  int n_sync = 0, n_fp_stall = 0, n_idle_wait = 0;
  always @(negedge clk) begin
    if (dut.u_dsp.s_rel != '0) n_sync++;
    if (dut.u_dsp.f_req != '0 && dut.u_dsp.f_ack == '0) n_fp_stall++;
    if (dut.u_dsp.g_q[1].u_core.state == 3'd4 && dut.u_dsp.g_q[1].u_core.ir.op == OP_IDLE) n_idle_wait++;
  end

  int mlog0 [$], mlog1 [$];
  always @(negedge clk) begin
    if (meas_valid_o[0]) mlog0.push_back(int'(meas_state_o[0]));
    if (meas_valid_o[1]) mlog1.push_back(int'(meas_state_o[1]));
  end

  initial begin
    instr_t p0 [10], p1 [12];
    logic [31:0] d;
    logic [1:0] r;
    int n11 = 0, n00 = 0, taken = 0, not_taken = 0;
    for (int p = 0; p < 3; p++) s_axil_req[p] = '0;
    #25 arst_n = 1;
    repeat (10) @(negedge clk);

    // ---- configuration ----
    for (int q = 0; q < 2; q++)
      for (int a = 0; a < 48; a++) begin
        axi_wr(1, bram(1, q, a), {16'sd16384, 16'sd0});   // drive envelope
        axi_wr(1, bram(2, q, a), {16'sd16384, 16'sd0});   // readout envelope (reused at two frequencies)
      end
    axi_wr(1, bram(3, 0, 0), 32'h0);  axi_wr(1, bram(3, 1, 0), 32'h0);
    axi_wr(1, bram(4, 0, 0), FW_R0);  axi_wr(1, bram(4, 1, 0), FW_R1);
    axi_wr(1, bram(5, 0, 0), FW_R0 * 4);  axi_wr(1, bram(5, 1, 0), FW_R1 * 4);
    axi_wr(0, 4 * (16 + 2), {16'sd32767, 16'sd0});
    axi_wr(0, 4 * (20 + 2), {16'sd32767, 16'sd0});
    axi_rd(1, bram(4, 1, 0), d, r);
    chk(d == FW_R1 && r == 0, "frequency buffer read-back over AXI");

    p0[0] = i_sync(3);
    p0[1] = i_pulse(mkcmd(ELEM_QDRV, 40000, 0, 0, 8, 0), 20);
    p0[2] = i_pulse(mkcmd(ELEM_RDRV, 30000, 0, 0, 40, 0), 40);
    p0[3] = i_pulse(mkcmd(ELEM_RDLO, 0, 0, 0, 32, 0), 40);
    p0[4] = i_sync(3);
    p0[5] = i_pulse(mkcmd(ELEM_RDRV, 30000, 0, 0, 40, 0), 20);
    p0[6] = i_pulse(mkcmd(ELEM_RDLO, 0, 0, 0, 32, 0), 20);
    p0[7] = i_regfproc(1, 0);
    p0[8] = i_done();
    p0[9] = i_done();
    p1[0] = i_sync(3);
    p1[1] = i_idle(60);
    p1[2] = i_jfproc(0, ALU_EQ, 1, 4);
    p1[3] = i_jump(6);
    p1[4] = i_pulse(mkcmd(ELEM_QDRV, 40000, 0, 0, 8, 0), 150);
    p1[5] = i_pulse(mkcmd(ELEM_QDRV, 40000, 0, 0, 8, 0), 170);
    p1[6] = i_sync(3);
    p1[7] = i_pulse(mkcmd(ELEM_RDRV, 30000, 0, 0, 40, 0), 20);
    p1[8] = i_pulse(mkcmd(ELEM_RDLO, 0, 0, 0, 32, 0), 20);
    p1[9] = i_regfproc(1, 1);
    p1[10] = i_done();
    p1[11] = i_done();
    load(0, p0, 10);
    load(1, p1, 12);

    // ---- shots ----
    for (int s = 0; s < SHOTS; s++) begin
      int m0, m1, x1;
      m0 = mlog0.size(); m1 = mlog1.size(); x1 = n_x90[1];
      quarter = '{0, 0};                   // qubits relax to |0> between shots
      axi_wr(0, 0, 32'b11);
      if (s == 1) begin                    // capture the ADC during the mid-circuit readout
        wait (ro_prev[0] == 1);
        axi_wr(0, 4 * 1, 32'h1);
      end
      d = 0;
      while (d[1:0] != 2'b11) axi_rd(0, 0, d, r);
      repeat (4) @(negedge clk);
      chk(mlog0.size() == m0 + 2 && mlog1.size() == m1 + 1, $sformatf("shot %0d measurement count", s));
      if (mlog0.size() == m0 + 2 && mlog1.size() == m1 + 1) begin
        chk(mlog0[m0 + 1] == mlog1[m1], $sformatf("shot %0d: |%0d%0d>", s, mlog0[m0 + 1], mlog1[m1]));
        chk(mlog0[m0] == mlog0[m0 + 1], "Q0 keeps its mid-circuit result");
        chk(n_x90[1] - x1 == 2 * mlog0[m0], "Q1 pulses follow Q0's result");
        if (mlog0[m0]) taken++; else not_taken++;
        if (mlog0[m0 + 1] && mlog1[m1]) n11++;
        if (!mlog0[m0 + 1] && !mlog1[m1]) n00++;
      end
    end
    $display("outcomes: |00> %0d, |11> %0d", n00, n11);

    // ---- buffers ----
    axi_rd(0, 4 * 256, d, r);
    chk(d == 2 * SHOTS, $sformatf("Q0 accumulation entries %0d", d));
    axi_rd(0, 4 * 257, d, r);
    chk(d == SHOTS, $sformatf("Q1 accumulation entries %0d", d));
    begin
      logic [31:0] qv;
      int nonzero;
      nonzero = 0;
      for (int n = 0; n < 4; n++) begin
        axi_rd(1, bram(6, 0, 2*n + 1), qv, r);
        if (qv != 0) nonzero++;
      end
      chk(nonzero == 4, "accumulated Q values stored");
    end
    axi_rd(0, 4 * 1, d, r);
    chk(d[0] == 0, "acquisition done");
    begin
      int nz;
      nz = 0;
      for (int n = 0; n < 16; n++)         // ADC samples: lanes 0 and 1 of each entry
        for (int l = 0; l < 2; l++) begin
          axi_rd(1, bram(7, 0, n*DSPC/2 + l), d, r);
          if (d != 0) nz++;
        end
      chk(nz > 16, $sformatf("acquired ADC words non-zero: %0d", nz));
    end
    // second ADC channel through the acquisition buffer (source 3)
    axi_wr(0, 4 * 1, 32'h7);
    d = 1;
    while (d[0]) axi_rd(0, 4 * 1, d, r);
    for (int n = 0; n < 8; n++)
      for (int l = 0; l < 2; l++) begin
        axi_rd(1, bram(7, 0, n*DSPC/2 + l), d, r);
        chk(d == {16'h5A01 + 16'(2*l), 16'h5A00 + 16'(2*l)}, $sformatf("second ADC entry %0d lane %0d: %h", n, l, d));
      end

    // ---- board configuration: stream handshakes, clock check ----
    @(negedge clk) m_axis_dac_tready[3] = 0;
    repeat (5) @(negedge clk);
    m_axis_dac_tready[3] = 1; s_axis_adc_tvalid[0] = 0;
    repeat (7) @(negedge clk);
    s_axis_adc_tvalid[0] = 1;
    axi_rd(2, 4 * 1, d, r);
    chk(d == 5, $sformatf("DAC underruns %0d", d));
    axi_rd(2, 4 * 2, d, r);
    chk(d == 7, $sformatf("ADC gaps %0d", d));
    while (cyc < 14000) @(negedge clk);
    axi_rd(2, 0, d, r);
    chk(d >= 4095 && d <= 4097, $sformatf("clock count %0d per 1024 reference cycles", d));

    // ---- PTP stamps ----
    @(negedge clk) ptp_tx_stb = 1; ptp_msg_delay_req = 0;
    @(negedge clk) ptp_tx_stb = 0;
    repeat (9) @(negedge clk);
    ptp_rx_stb = 1; ptp_msg_delay_req = 1;
    @(negedge clk) ptp_rx_stb = 0;
    begin
      logic [31:0] t1, t4, fl;
      axi_rd(2, 4 * 'h12, t1, r);
      axi_rd(2, 4 * 'h18, t4, r);
      axi_rd(2, 4 * 'h1A, fl, r);
      chk(t4 - t1 == 10 && fl == 4'b1001, "PTP t1/t4 stamps");
    end

    // ---- AXI read of an unmapped buffer region ----
    axi_rd(1, bram(9, 0, 0), d, r);
    chk(r == 2'b10, "unmapped read ends in SLVERR");

    // ---- every mechanism happened ----
    $display("mechanisms: sync %0d, fproc stall %0d, branch taken %0d / not %0d, idle wait %0d, mux readout %0d",
             n_sync, n_fp_stall, taken, not_taken, n_idle_wait, n_mux);
    chk(n_sync > 0, "sync release happened");
    chk(n_fp_stall > 0, "function-processor stall happened");
    chk(taken > 0, "feed-forward branch taken");
    chk(not_taken > 0, "feed-forward branch not taken");
    chk(n_idle_wait > 0, "idle wait happened");
    chk(n_mux > 0, "multiplexed readout happened");
    chk(n00 > 0 && n11 > 0, "both |00> and |11> observed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
