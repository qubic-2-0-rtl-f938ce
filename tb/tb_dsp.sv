// tb_dsp: fast reset (measure, and if the qubit reads |1> apply two X90
// pulses, then measure again) on qubit 0 of a two-qubit DSP, followed by
// the converse test (two X90 pulses when it reads |0>, so every shot ends
// in |1>), with a behavioural qubit in the testbench:
//   * every qubit-drive pulse on qubit 0 is an X90 (quarter turn);
//   * a readout drive pulse measures: on the equator the outcome is random,
//     the qubit collapses, and the ADC carries a readout tone whose phase
//     is +90 degrees for |0> and -90 degrees for |1>, so the discriminator
//     (no shift, no rotation) decides on the sign of Q.
// Core 1 synchronises with core 0 at the start of every shot although it
// is started later, so its pulse must follow qubit 0's by exactly the
// programmed 10 clocks. Also checks the accumulation buffer count and
// acquisition-buffer captures of the ADC stream and of the readout DAC.
module tb_dsp;
  import qubic_pkg::*;
  import qubic_asm_pkg::*;
  localparam int NQ = 2, DSPC = 4, ASPC = 4;
  localparam int SHOTS = 8;
  localparam logic [31:0] FW_RO = 32'h0400_0000;       // readout tone, per DAC sample
  logic clk = 0, rst_n = 0;
  lb_req_t lb_dsp_req = '0, lb_bram_req = '0;
  lb_rsp_t lb_dsp_rsp, lb_bram_rsp;
  sample_t adc_i [ASPC];
  sample_t adc1_i [ASPC];
  sample_t qdrv_o [NQ][DSPC];
  sample_t rdrv_o [DSPC];
  logic [NQ-1:0] meas_valid_o, meas_state_o;
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  dsp #(.NQ(NQ), .DSPC(DSPC), .ASPC(ASPC), .PROG_DEPTH(32), .ENV_DEPTH(64), .FREQ_DEPTH(16),
        .ACC_DEPTH(64), .ACQ_DEPTH(16)) dut (.*);

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  task automatic wr_bram(input int region, input int q, input int off, input logic [31:0] d);
    @(negedge clk);
    lb_bram_req.wr = 1; lb_bram_req.addr = {4'(region), 4'(q), 16'(off)}; lb_bram_req.wdata = d;
    @(negedge clk) lb_bram_req.wr = 0;
  endtask

  task automatic wr_dsp(input int a, input logic [31:0] d);
    @(negedge clk);
    lb_dsp_req.wr = 1; lb_dsp_req.addr = 24'(a); lb_dsp_req.wdata = d;
    @(negedge clk) lb_dsp_req.wr = 0;
  endtask

  task automatic rd_bram(input int region, input int q, input int off, output logic [31:0] d);
    @(negedge clk);
    lb_bram_req.rd = 1; lb_bram_req.addr = {4'(region), 4'(q), 16'(off)};
    @(negedge clk) lb_bram_req.rd = 0;
    while (!lb_bram_rsp.rvalid) @(negedge clk);
    d = lb_bram_rsp.rdata;
  endtask

  task automatic rd_dsp(input int a, output logic [31:0] d);
    @(negedge clk);
    lb_dsp_req.rd = 1; lb_dsp_req.addr = 24'(a);
    @(negedge clk) lb_dsp_req.rd = 0;
    d = lb_dsp_rsp.rdata;
  endtask

  task automatic load(input int q, input instr_t p [], input int n);
    for (int i = 0; i < n; i++)
      for (int l = 0; l < 4; l++) wr_bram(0, q, i*4 + l, p[i][l*32 +: 32]);
  endtask

  // ---------------- behavioural qubit 0 and readout ----------------
  int  quarter = 0;            // qubit angle in quarter turns about X
  int  ro_phase = 0;           // readout tone phase (17-bit units)
  bit  q_drv_prev = 0, r_prev = 0, q1_prev = 0;
  int  n_x90 = 0, n_meas = 0, q0_edge = -1, q1_edge = -1;
  sample_t adc_hist [int][ASPC];
  logic [DSPC*16-1:0] dac_hist [int];
  int sync_gap [$];
  int trig_cyc = -1;

  function automatic bit any_nz(input sample_t s [DSPC]);
    for (int k = 0; k < DSPC; k++) if (s[k] != 0) return 1;
    return 0;
  endfunction

  always @(negedge clk) begin
    bit qa, ra, q1a;
    qa = any_nz(qdrv_o[0]);
    q1a = any_nz(qdrv_o[1]);
    ra = any_nz(rdrv_o);
    if (qa && !q_drv_prev && rst_n) begin quarter = (quarter + 1) % 4; n_x90++; q0_edge = cyc; end
    if (q1a && !q1_prev && rst_n) begin q1_edge = cyc; sync_gap.push_back(cyc - q0_edge); end
    if (ra && !r_prev && rst_n) begin
      int outcome;
      n_meas++;
      if (quarter % 2 == 1) outcome = int'($urandom_range(1));
      else outcome = (quarter == 2) ? 1 : 0;
      quarter = outcome ? 2 : 0;
      ro_phase = outcome ? 98304 : 32768;
    end
    q_drv_prev = qa; r_prev = ra; q1_prev = q1a;
    for (int k = 0; k < ASPC; k++) begin
      int c, s;
      ref_carrier(longint'(FW_RO) * 4, ro_phase, longint'(dut.tcount), ASPC, k, c, s);
      adc_i[k] = ra ? sample_t'((8000 * c) >>> 15) : sample_t'(0);
      adc_hist[cyc][k] = adc_i[k];
    end
    for (int k = 0; k < DSPC; k++) dac_hist[cyc][k*16 +: 16] = rdrv_o[k];
  end

  // measurement log of qubit 0
  int mlog [$];
  always @(negedge clk) if (meas_valid_o[0]) mlog.push_back(int'(meas_state_o[0]));

  initial begin
    instr_t p0 [12], p1 [4];
    logic [31:0] d;
    int ones = 0, zeros = 0;
    for (int k = 0; k < ASPC; k++) begin adc_i[k] = '0; adc1_i[k] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // envelopes: flat, 0.5 amplitude, for drive and readout of both qubits
    for (int q = 0; q < NQ; q++)
      for (int a = 0; a < 64; a++) begin
        wr_bram(1, q, a, {16'sd16384, 16'sd0});
        wr_bram(2, q, a, {16'sd16384, 16'sd0});
      end
    wr_bram(3, 0, 0, 32'h0);             // qubit drive: baseband here
    wr_bram(3, 1, 0, 32'h0);
    wr_bram(4, 0, 0, FW_RO);             // readout drive tone
    wr_bram(5, 0, 0, FW_RO * 4);         // LO at the same frequency, ADC rate
    wr_dsp(16 + 2, {16'sd32767, 16'sd0});    // qubit 0 discriminator: y = Q
    // fast-reset program for core 0
    p0[0]  = i_sync(3);
    p0[1]  = i_pulse(mkcmd(ELEM_QDRV, 40000, 0, 0, 8, 0), 20);      // X90
    p0[2]  = i_pulse(mkcmd(ELEM_RDRV, 30000, 0, 0, 40, 0), 40);     // readout drive
    p0[3]  = i_pulse(mkcmd(ELEM_RDLO, 0, 0, 0, 34, 0), 40);         // readout LO window
    p0[4]  = i_jfproc(0, ALU_EQ, 1, 6);                             // measured |1> ?
    p0[5]  = i_jump(8);
    p0[6]  = i_pulse(mkcmd(ELEM_QDRV, 40000, 0, 0, 8, 0), 150);     // X90
    p0[7]  = i_pulse(mkcmd(ELEM_QDRV, 40000, 0, 0, 8, 0), 170);     // X90
    p0[8]  = i_pulse(mkcmd(ELEM_RDRV, 30000, 0, 0, 40, 0), 200);
    p0[9]  = i_pulse(mkcmd(ELEM_RDLO, 0, 0, 0, 34, 0), 200);
    p0[10] = i_regfproc(1, 0);
    p0[11] = i_done();
    p1[0]  = i_sync(3);
    p1[1]  = i_pulse(mkcmd(ELEM_QDRV, 40000, 0, 0, 8, 0), 30);
    p1[2]  = i_done();
    p1[3]  = i_done();
    load(0, p0, 12);
    load(1, p1, 4);
    for (int v = 0; v < 2; v++) begin
    if (v == 1) begin                      // converse: flip when the qubit reads |0>
      p0[4] = i_jfproc(0, ALU_EQ, 0, 6);
      for (int l = 0; l < 4; l++) wr_bram(0, 0, 4*4 + l, p0[4][l*32 +: 32]);
    end
    ones = 0; zeros = 0;
    for (int s = 0; s < SHOTS; s++) begin
      int x0, m0;
      x0 = n_x90; m0 = mlog.size();
      wr_dsp(0, 32'b01);                   // core 0 first ...
      repeat (10) @(negedge clk);
      wr_dsp(0, 32'b10);                   // ... core 1 later; sync lines them up
      if (s == 2) begin                    // acquisition during a readout:
        wait (r_prev == 1);                // ADC in the first run, readout DAC in the second
        @(negedge clk);
        lb_dsp_req.wr = 1; lb_dsp_req.addr = 24'd1; lb_dsp_req.wdata = v ? 32'h5 : 32'h1;
        trig_cyc = cyc;
        @(negedge clk) lb_dsp_req.wr = 0;
      end
      d = 0;
      while (d[1:0] != 2'b11) rd_dsp(0, d);
      repeat (5) @(negedge clk);
      chk(mlog.size() == m0 + 2, "two measurements per shot");
      if (mlog.size() == m0 + 2) begin
        chk(mlog[m0 + 1] == v, $sformatf("variant %0d shot %0d ends in |%0d>", v, s, v));
        chk(n_x90 - x0 == 1 + 2 * (v ? 1 - mlog[m0] : mlog[m0]), "conditional pulses follow the mid-circuit result");
        if (mlog[m0]) ones++; else zeros++;
      end
      chk(dut.g_q[0].u_core.regs[1] == 32'(v), "final fproc read");
    end
    chk(ones > 0 && zeros > 0, $sformatf("variant %0d: both branches taken (%0d / %0d)", v, ones, zeros));
    // acquisition: 16 clocks, DSPC/2 lanes per entry
    rd_dsp(1, d);
    chk(d[0] == 0, "acquisition finished");
    for (int n = 0; n < 16; n++) begin
      logic [DSPC*16-1:0] e, x;
      for (int l = 0; l < DSPC/2; l++) begin
        logic [31:0] w;
        rd_bram(7, 0, n*DSPC/2 + l, w);
        e[l*32 +: 32] = w;
      end
      if (v == 0) begin
        x = '0;
        for (int k = 0; k < ASPC; k++) x[k*16 +: 16] = adc_hist[trig_cyc+1+n][k];
      end else x = dac_hist[trig_cyc+1+n];
      chk(e == x && e != 0, $sformatf("acquired %s entry %0d", v ? "DAC" : "ADC", n));
    end
    end
    rd_dsp(256, d);
    chk(d == 4 * SHOTS, $sformatf("accumulation count %0d", d));
    chk(sync_gap.size() == 2 * SHOTS, "core 1 pulsed every shot");
    foreach (sync_gap[i]) chk(sync_gap[i] == 10, $sformatf("core 1 pulse %0d clocks after core 0", sync_gap[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
