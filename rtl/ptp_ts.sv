// ptp_ts: timestamp unit for the simplified precision-time protocol.
//
// Two boards share a reference clock but their counters have an unknown
// constant offset. The primary sends Sync at t1 (its time), the secondary
// receives it at t2 (its time), answers with Delay_Req at t3, and the
// primary receives that at t4. From the four stamps software computes
//     delay  = ((t4 - t1) - (t3 - t2)) / 2
//     offset = ((t2 - t1) - (t4 - t3)) / 2
// and corrects the secondary's time. This unit keeps a free-running TS_W
// counter and latches it on each message event: tx of Sync -> t1, rx of
// Sync -> t2, tx of Delay_Req -> t3, rx of Delay_Req -> t4. A board fills
// the two stamps of its role. Message transport is outside this unit (the
// paper does not describe it). stamp_valid[i] flags stamp i+1 as captured
// since the last clear. Timing: a stamp holds the counter value of the
// clock on which the strobe is high.
module ptp_ts #(
  parameter int TS_W = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 tx_stb,
  input  logic                 rx_stb,
  input  logic                 msg_delay_req,   // 0: Sync, 1: Delay_Req
  output logic [TS_W-1:0]      now,
  output logic [3:0][TS_W-1:0] stamp,
  output logic [3:0]           stamp_valid
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      now <= '0; stamp <= '0; stamp_valid <= '0;
    end else begin
      now <= now + 1'b1;
      if (clear) stamp_valid <= '0;
      if (tx_stb) begin
        stamp[msg_delay_req ? 2 : 0]       <= now;
        stamp_valid[msg_delay_req ? 2 : 0] <= 1'b1;
      end
      if (rx_stb) begin
        stamp[msg_delay_req ? 3 : 1]       <= now;
        stamp_valid[msg_delay_req ? 3 : 1] <= 1'b1;
      end
    end
  end
endmodule
