// acq_buffer: acquisition buffer, a one-shot capture "oscilloscope".
//
// On a trigger it records DEPTH consecutive clocks of one of NSRC raw
// sample streams (selected by sel: in the full design ADC samples, the
// digital-LO mixed samples, readout DAC samples or the second ADC
// channel) so software can look at live converter data. Each record is
// DW bits, read over the local bus as DW/32 lanes (address = entry*LANES + lane). busy is high while
// capturing; a trigger during a capture is ignored. The paper gives the
// purpose (live view of ADC/DLO/DAC data); the one-shot trigger scheme is
// this design's. Reads return one clock after lb_re.
module acq_buffer #(
  parameter int DW    = 256,
  parameter int NSRC  = 4,
  parameter int DEPTH = 1024
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   trigger,
  input  logic [1:0]             sel,
  input  logic [NSRC-1:0][DW-1:0] src,
  output logic                   busy,
  input  logic                   lb_re,
  input  logic [$clog2(DEPTH)+$clog2(DW/32)-1:0] lb_addr,
  output logic [31:0]            lb_rdata,
  output logic                   lb_rvalid
);
  localparam int AW    = $clog2(DEPTH);
  localparam int LANES = DW / 32;
  localparam int LW    = $clog2(LANES);

  logic [LANES-1:0][31:0] mem [DEPTH];
  logic [AW-1:0]          wptr;
  logic [1:0]             sel_r;
  logic [DW-1:0]          din;

  assign din = (32'(sel_r) < NSRC) ? src[sel_r] : '0;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; wptr <= '0; sel_r <= '0; lb_rvalid <= 1'b0;
    end else begin
      lb_rvalid <= lb_re;
      if (!busy && trigger) begin
        busy  <= 1'b1;
        wptr  <= '0;
        sel_r <= sel;
      end else if (busy) begin
        wptr <= wptr + 1'b1;
        if (wptr == AW'(DEPTH - 1)) busy <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (busy) mem[wptr] <= din;
    lb_rdata <= mem[lb_addr[AW+LW-1:LW]][lb_addr[LW-1:0]];
  end
endmodule
