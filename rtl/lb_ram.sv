// lb_ram: a buffer RAM filled from the local bus and read by the DSP.
//
// Used for the per-core command (program) buffer, the envelope buffers and
// the frequency buffers. Each word is DW bits = LANES x 32 bits; the local
// bus addresses one 32-bit lane at a time (address = word*LANES + lane),
// so software writes a wide word lane by lane. Port A (local bus) writes a
// lane or reads one back; port B is a read-only port for the datapath.
// Both reads are registered: data appears the clock after the address.
// The paper says envelopes are stored in block RAM as complex I/Q points;
// depths and the lane scheme are this design's choices.
module lb_ram #(
  parameter int DW    = 32,
  parameter int DEPTH = 4096
) (
  input  logic                     clk,
  // port A: local bus
  input  logic                     a_we,
  input  logic                     a_re,
  input  logic [$clog2(DEPTH)+$clog2(DW/32)-1:0] a_addr,
  input  logic [31:0]              a_wdata,
  output logic [31:0]              a_rdata,
  output logic                     a_rvalid,
  // port B: datapath read
  input  logic [$clog2(DEPTH)-1:0] b_addr,
  output logic [DW-1:0]            b_rdata
);
  localparam int LANES = DW / 32;
  localparam int LW    = (LANES > 1) ? $clog2(LANES) : 1;
  localparam int AW    = $clog2(DEPTH);

  logic [LANES-1:0][31:0] mem [DEPTH];

  logic [AW-1:0] a_word;
  logic [LW-1:0] a_lane;

  generate
    if (LANES > 1) begin : g_lanes
      assign a_word = a_addr[AW+LW-1:LW];
      assign a_lane = a_addr[LW-1:0];
    end else begin : g_single
      assign a_word = a_addr[AW-1:0];
      assign a_lane = '0;
    end
  endgenerate

  always_ff @(posedge clk) begin
    if (a_we) mem[a_word][a_lane] <= a_wdata;
    a_rdata  <= mem[a_word][a_lane];
    a_rvalid <= a_re;
    b_rdata  <= mem[b_addr];
  end
endmodule
