// reset_sync: asynchronous-assert, synchronous-release reset.
//
// arst_n low clears the output at once, without waiting for a clock edge,
// so a reset reaches the logic with the least latency. Release is passed
// through STAGES flip-flops so that every flop in the domain leaves reset
// on the same clock edge. The board-configuration block has one of these
// per clock domain. The paper names "asynchronous reset logic" only; the
// two-stage synchroniser is the usual circuit and this design's choice.
// Timing: rst_n rises STAGES clk edges after arst_n rises.
module reset_sync #(
  parameter int STAGES = 2
) (
  input  logic clk,
  input  logic arst_n,
  output logic rst_n
);
  logic [STAGES-1:0] sr;

  always_ff @(posedge clk or negedge arst_n) begin
    if (!arst_n) sr <= '0;
    else         sr <= {sr[STAGES-2:0], 1'b1};
  end

  assign rst_n = sr[STAGES-1];
endmodule
