// tb_board_cfg: reset release, DSP clock measured against the reference
// (500 MHz vs 125 MHz, 64-cycle gate -> 256), AXI4-Stream data and the
// underrun / gap counters.
// Two DAC and one ADC stream at 2 samples per clock. DAC tdata must equal
// the DSP samples one clock later; ADC samples pass through and are zero
// while tvalid is low. Clocks with tready low must be counted as
// underruns, and ADC clocks with tvalid low as gaps. A write to the
// underrun counter must clear it. The block's three parts are the
// paper's; the counters and register map are this design's.
module tb_board_cfg;
  import qubic_pkg::*;
  localparam int NDAC = 2, NADC = 1, DSPC = 2, ASPC = 2;
  logic clk = 0, ref_clk = 0, arst_n = 0, rst_n;
  sample_t dac_i [NDAC][DSPC];
  sample_t adc_o [NADC][ASPC];
  logic [NDAC-1:0][DSPC*16-1:0] m_axis_tdata;
  logic [NDAC-1:0] m_axis_tvalid, m_axis_tready = '1;
  logic [NADC-1:0][ASPC*16-1:0] s_axis_tdata = '0;
  logic [NADC-1:0] s_axis_tvalid = '1, s_axis_tready;
  lb_req_t lb_req = '0;
  lb_rsp_t lb_rsp;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  always #4 ref_clk = ~ref_clk;
  board_cfg #(.NDAC(NDAC), .NADC(NADC), .DSPC(DSPC), .ASPC(ASPC), .GATE_CYCLES(64)) dut (.*);

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  task automatic rd(input int a, output logic [31:0] d);
    @(negedge clk) lb_req.rd = 1; lb_req.addr = 24'(a);
    @(negedge clk) lb_req.rd = 0;
    d = lb_rsp.rdata;
    chk(lb_rsp.rvalid, "read answered");
  endtask

  initial begin
    logic [31:0] d;
    for (int n = 0; n < NDAC; n++) for (int k = 0; k < DSPC; k++) dac_i[n][k] = '0;
    #21;
    chk(rst_n == 0, "reset held");
    arst_n = 1;
    repeat (3) @(negedge clk);
    chk(rst_n == 1, "reset released");
    // DAC stream: registered samples
    for (int t = 0; t < 20; t++) begin
      @(negedge clk);
      for (int n = 0; n < NDAC; n++) for (int k = 0; k < DSPC; k++) dac_i[n][k] = sample_t'($urandom);
      @(negedge clk);
      for (int n = 0; n < NDAC; n++) for (int k = 0; k < DSPC; k++)
        chk(m_axis_tdata[n][k*16 +: 16] == dac_i[n][k] && m_axis_tvalid[n], "dac tdata");
    end
    // ADC stream
    @(negedge clk) s_axis_tdata[0] = 32'h1234_8765;
    @(negedge clk);
    chk(adc_o[0][0] == 16'sh8765 && adc_o[0][1] == 16'sh1234 && s_axis_tready[0], "adc samples");
    // 3 clocks of underrun, 4 clocks of missing ADC data
    @(negedge clk) m_axis_tready[1] = 0;
    repeat (3) @(negedge clk);
    m_axis_tready[1] = 1; s_axis_tvalid[0] = 0;
    repeat (4) @(negedge clk);
    chk(adc_o[0][0] == 0, "adc zero without tvalid");
    s_axis_tvalid[0] = 1;
    @(negedge clk);
    rd(1, d); chk(d == 3, "underruns = 3");
    rd(2, d); chk(d == 4, "gaps = 4");
    @(negedge clk) lb_req.wr = 1; lb_req.addr = 24'd1;
    @(negedge clk) lb_req.wr = 0;
    rd(1, d); chk(d == 0, "underruns cleared");
    // frequency counter: wait for several gates
    repeat (2000) @(negedge clk);
    rd(0, d); chk(d >= 255 && d <= 257, $sformatf("clock count %0d ~ 256", d));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
