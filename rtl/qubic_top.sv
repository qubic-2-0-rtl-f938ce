// qubic_top: programmable-logic top of the qubit controller.
//
// NQ qubits, each with a processor core that schedules pulses on its own
// qubit-drive DAC, on the shared readout-drive DAC and on the readout
// down-converter, and that can branch on measurement results during the
// circuit (mid-circuit measurement with feed-forward). Blocks:
//   * three AXI4-Lite-to-local-bus bridges: DSP registers (port 0), DSP
//     buffers/BRAM (port 1) and board configuration (port 2);
//   * board_cfg: resets, clock-frequency check, AXI4-Stream to the RF data
//     converter (DAC stream q = qubit-drive q, stream NQ = readout drive;
//     ADC stream 0 = readout input, ADC stream 1 = second channel,
//     observed through the acquisition buffer);
//   * dsp: cores, generators, readout chain, function processor, sync;
//   * ptp_ts: timestamps for synchronising several boards.
// The processing system, AXI interconnect and RF data converter are vendor
// parts outside this module; their AXI and AXI4-Stream ports are ports here.
// Configuration bus map (port 2, byte address / 4): 0x00-0x0F board_cfg,
// 0x10/0x11 PTP counter low/high (write 0x10 clears stamp flags),
// 0x12 + 2i / 0x13 + 2i stamp t(i+1) low/high, 0x1A stamp flags.
// Everything runs on the DSP clock `clk` (500 MHz in the paper); ref_clk
// is used only to check clk's frequency.
// A few output bits are constant by design: ADC tready (the streams are
// always accepted) and bit 0 of the AXI responses (only OKAY and SLVERR
// are ever returned).
module qubic_top
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
  input  logic      clk,
  input  logic      ref_clk,
  input  logic      arst_n,
  input  axil_req_t s_axil_req [3],
  output axil_rsp_t s_axil_rsp [3],
  output logic [NQ:0][DSPC*16-1:0] m_axis_dac_tdata,
  output logic [NQ:0]              m_axis_dac_tvalid,
  input  logic [NQ:0]              m_axis_dac_tready,
  input  logic [1:0][ASPC*16-1:0]  s_axis_adc_tdata,
  input  logic [1:0]              s_axis_adc_tvalid,
  output logic [1:0]              s_axis_adc_tready,
  input  logic      ptp_tx_stb,
  input  logic      ptp_rx_stb,
  input  logic      ptp_msg_delay_req,
  output logic [NQ-1:0] meas_valid_o,
  output logic [NQ-1:0] meas_state_o
);
  logic    rst_n;
  lb_req_t lb_req [3];
  lb_rsp_t lb_rsp [3];

  for (genvar b = 0; b < 3; b++) begin : g_br
    axil_lb u_br (.clk, .rst_n, .s_req(s_axil_req[b]), .s_rsp(s_axil_rsp[b]),
                  .lb_req(lb_req[b]), .lb_rsp(lb_rsp[b]));
  end

  // DSP
  sample_t adc  [2][ASPC];
  sample_t qdrv [NQ][DSPC];
  sample_t rdrv [DSPC];
  sample_t dacs [NQ+1][DSPC];

  dsp #(.NQ(NQ), .DSPC(DSPC), .ASPC(ASPC), .PROG_DEPTH(PROG_DEPTH), .ENV_DEPTH(ENV_DEPTH),
        .FREQ_DEPTH(FREQ_DEPTH), .ACC_DEPTH(ACC_DEPTH), .ACQ_DEPTH(ACQ_DEPTH)) u_dsp (
    .clk, .rst_n, .lb_dsp_req(lb_req[0]), .lb_dsp_rsp(lb_rsp[0]),
    .lb_bram_req(lb_req[1]), .lb_bram_rsp(lb_rsp[1]),
    .adc_i(adc[0]), .adc1_i(adc[1]), .qdrv_o(qdrv), .rdrv_o(rdrv),
    .meas_valid_o, .meas_state_o);

  always_comb begin
    for (int q = 0; q < NQ; q++) dacs[q] = qdrv[q];
    dacs[NQ] = rdrv;
  end

  // board configuration and the PTP unit share configuration bus port 2
  lb_req_t bc_req;
  lb_rsp_t bc_rsp;
  logic    cfg_is_bc;
  assign cfg_is_bc     = lb_req[2].addr < 24'h10;
  assign bc_req.wr     = lb_req[2].wr && cfg_is_bc;
  assign bc_req.rd     = lb_req[2].rd && cfg_is_bc;
  assign bc_req.addr   = lb_req[2].addr;
  assign bc_req.wdata  = lb_req[2].wdata;

  board_cfg #(.NDAC(NQ+1), .NADC(2), .DSPC(DSPC), .ASPC(ASPC)) u_bc (
    .clk, .ref_clk, .arst_n, .rst_n,
    .dac_i(dacs), .adc_o(adc),
    .m_axis_tdata(m_axis_dac_tdata), .m_axis_tvalid(m_axis_dac_tvalid),
    .m_axis_tready(m_axis_dac_tready),
    .s_axis_tdata(s_axis_adc_tdata), .s_axis_tvalid(s_axis_adc_tvalid),
    .s_axis_tready(s_axis_adc_tready),
    .lb_req(bc_req), .lb_rsp(bc_rsp));

  logic [63:0]      ptp_now;
  logic [3:0][63:0] ptp_stamp;
  logic [3:0]       ptp_valid;
  logic             ptp_clear;
  lb_rsp_t          ptp_rsp;

  assign ptp_clear = lb_req[2].wr && lb_req[2].addr == 24'h10;

  ptp_ts #(.TS_W(64)) u_ptp (
    .clk, .rst_n, .clear(ptp_clear), .tx_stb(ptp_tx_stb), .rx_stb(ptp_rx_stb),
    .msg_delay_req(ptp_msg_delay_req), .now(ptp_now), .stamp(ptp_stamp), .stamp_valid(ptp_valid));

  always_ff @(posedge clk) begin
    if (!rst_n) ptp_rsp <= '0;
    else begin
      ptp_rsp.rvalid <= lb_req[2].rd && !cfg_is_bc;
      unique case (lb_req[2].addr)
        24'h10:  ptp_rsp.rdata <= ptp_now[31:0];
        24'h11:  ptp_rsp.rdata <= ptp_now[63:32];
        24'h12:  ptp_rsp.rdata <= ptp_stamp[0][31:0];
        24'h13:  ptp_rsp.rdata <= ptp_stamp[0][63:32];
        24'h14:  ptp_rsp.rdata <= ptp_stamp[1][31:0];
        24'h15:  ptp_rsp.rdata <= ptp_stamp[1][63:32];
        24'h16:  ptp_rsp.rdata <= ptp_stamp[2][31:0];
        24'h17:  ptp_rsp.rdata <= ptp_stamp[2][63:32];
        24'h18:  ptp_rsp.rdata <= ptp_stamp[3][31:0];
        24'h19:  ptp_rsp.rdata <= ptp_stamp[3][63:32];
        24'h1A:  ptp_rsp.rdata <= 32'(ptp_valid);
        default: ptp_rsp.rdata <= '0;
      endcase
    end
  end

  assign lb_rsp[2].rvalid = bc_rsp.rvalid | ptp_rsp.rvalid;
  assign lb_rsp[2].rdata  = bc_rsp.rvalid ? bc_rsp.rdata : ptp_rsp.rdata;
endmodule
