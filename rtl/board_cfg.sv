// board_cfg: board configuration, the edge between converters and DSP.
//
// Holds three things the paper lists for this block:
//   * asynchronous reset: one reset_sync per clock domain (DSP and
//     reference clock), asserting at once and releasing synchronously;
//   * a frequency counter that measures the DSP clock against the
//     reference clock, so software can verify the clock set-up;
//   * the AXI4-Stream handshake with the RF data converter: each DAC
//     stream gets registered tdata with tvalid high out of reset, and a
//     clock on which the converter does not take a word (tready low) is
//     counted as an underrun; ADC streams are accepted at once (tready
//     high) and a clock without tvalid delivers zeros and is counted.
// Register bus (word addresses): 0 DSP-clock count per GATE_CYCLES
// reference clocks, 1 DAC underruns, 2 ADC gaps; any write to 1 or 2
// clears that counter. Reads answer one clock after rd.
// Timing: DAC samples reach tdata one clock after dac_i, ADC samples reach
// adc_o one clock after tdata. The counter and reset details are this
// design's choices.
module board_cfg
  import qubic_pkg::*;
#(
  parameter int NDAC        = 16,
  parameter int NADC        = 2,
  parameter int DSPC        = DAC_SPC,
  parameter int ASPC        = ADC_SPC,
  parameter int GATE_CYCLES = 1024
) (
  input  logic    clk,
  input  logic    ref_clk,
  input  logic    arst_n,
  output logic    rst_n,
  // DSP side
  input  sample_t dac_i [NDAC][DSPC],
  output sample_t adc_o [NADC][ASPC],
  // AXI4-Stream to / from the data converters
  output logic [NDAC-1:0][DSPC*16-1:0] m_axis_tdata,
  output logic [NDAC-1:0]              m_axis_tvalid,
  input  logic [NDAC-1:0]              m_axis_tready,
  input  logic [NADC-1:0][ASPC*16-1:0] s_axis_tdata,
  input  logic [NADC-1:0]              s_axis_tvalid,
  output logic [NADC-1:0]              s_axis_tready,
  // configuration register bus
  input  lb_req_t lb_req,
  output lb_rsp_t lb_rsp
);
  logic ref_rst_n;
  logic [31:0] fcount, underruns, gaps;
  logic        fvalid;

  reset_sync u_rst_dsp (.clk(clk),     .arst_n, .rst_n(rst_n));
  reset_sync u_rst_ref (.clk(ref_clk), .arst_n, .rst_n(ref_rst_n));

  freq_counter #(.GATE_CYCLES(GATE_CYCLES), .CNT_W(32)) u_fcnt (
    .ref_clk, .ref_rst_n, .meas_clk(clk), .meas_rst_n(rst_n), .count(fcount), .valid(fvalid));

  // reference-domain result, re-registered in the DSP domain when stable
  logic [31:0] fcount_dsp;
  logic [2:0]  fv_sync;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fv_sync <= '0; fcount_dsp <= '0;
    end else begin
      fv_sync <= {fv_sync[1:0], fvalid};
      if (fv_sync[2] && !fv_sync[1]) fcount_dsp <= fcount;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      m_axis_tdata  <= '0;
      m_axis_tvalid <= '0;
      s_axis_tready <= '0;
      underruns <= '0; gaps <= '0; lb_rsp <= '0;
      for (int a = 0; a < NADC; a++)
        for (int k = 0; k < ASPC; k++) adc_o[a][k] <= '0;
    end else begin
      m_axis_tvalid <= '1;
      s_axis_tready <= '1;
      for (int d = 0; d < NDAC; d++)
        for (int k = 0; k < DSPC; k++) m_axis_tdata[d][k*16 +: 16] <= dac_i[d][k];
      for (int a = 0; a < NADC; a++)
        for (int k = 0; k < ASPC; k++)
          adc_o[a][k] <= s_axis_tvalid[a] ? sample_t'(s_axis_tdata[a][k*16 +: 16]) : '0;
      if (lb_req.wr && lb_req.addr == 24'd1)       underruns <= '0;
      else if ((m_axis_tvalid & ~m_axis_tready) != '0) underruns <= underruns + 1'b1;
      if (lb_req.wr && lb_req.addr == 24'd2)       gaps <= '0;
      else if ((s_axis_tready & ~s_axis_tvalid) != '0) gaps <= gaps + 1'b1;
      lb_rsp.rvalid <= lb_req.rd;
      unique case (lb_req.addr)
        24'd0:   lb_rsp.rdata <= fcount_dsp;
        24'd1:   lb_rsp.rdata <= underruns;
        24'd2:   lb_rsp.rdata <= gaps;
        default: lb_rsp.rdata <= '0;
      endcase
    end
  end
endmodule
