// acc_buffer: accumulation buffer for integrated readout results.
//
// Every I/Q point that a readout down-converter produces is written to
// the next entry (write pointer wraps after DEPTH shots), together with
// so software can read whole batches of shots
// after a run. Local-bus read address 2*n reads I of entry n, 2*n+1 reads
// Q; `count` gives the number of entries written since the last clear. The paper names the buffer and
// says it stores the accumulated values; organisation and depth are this
// design's choices. Reads return one clock after lb_re.
module acc_buffer #(
  parameter int DEPTH = 1024
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               valid_i,
  input  logic signed [31:0] i_i,
  input  logic signed [31:0] q_i,
  input  logic               lb_re,
  input  logic [$clog2(DEPTH):0] lb_addr,
  output logic [31:0]        lb_rdata,
  output logic               lb_rvalid,
  output logic [31:0]        count
);
  localparam int AW = $clog2(DEPTH);
  logic [1:0][31:0] mem [DEPTH];
  logic [AW-1:0]    wptr;

  always_ff @(posedge clk) begin
    if (valid_i) mem[wptr] <= {q_i, i_i};
    lb_rdata <= mem[lb_addr[AW:1]][lb_addr[0]];
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      wptr  <= '0;
      count <= '0;
    end else if (valid_i) begin
      wptr  <= wptr + 1'b1;
      count <= count + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) lb_rvalid <= 1'b0;
    else        lb_rvalid <= lb_re;
  end
endmodule
