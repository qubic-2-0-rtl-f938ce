// sync_barrier: the cores' synchronisation interface.
//
// A core that executes a sync instruction raises req[c] with the set of
// cores it synchronises with (mask[c], its own bit included) and stalls.
// Core c is released once every core in its mask is waiting; cores that
// list the same set are therefore released on the same clock, and each
// then resets its time reference (qclk) so their timelines line up. The
// paper gives this behaviour; the mask encoding is this design's.
// Handshake: req held until release; release[c] is a one-clock pulse,
// registered (one clock after the last core of the set arrives).
module sync_barrier #(
  parameter int NC = 15
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NC-1:0]          req,
  input  logic [NC-1:0][NC-1:0]  mask,
  output logic [NC-1:0]          release_o
);
  always_ff @(posedge clk) begin
    if (!rst_n) release_o <= '0;
    else
      for (int c = 0; c < NC; c++)
        release_o[c] <= req[c] && !release_o[c] && ((req | ~mask[c]) == '1);
  end

  for (genvar c = 0; c < NC; c++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) req[c] && !release_o[c] |=> req[c]);
  end
endmodule
