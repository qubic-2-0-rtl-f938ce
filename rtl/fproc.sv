// fproc: function processor, the cores' source of measurement results.
//
// Each core can ask for "function" id; for id < NQ the answer is the most
// recent discriminated state of qubit id. A request is held (the core
// stalls) while that qubit has a readout in flight (busy) or has never
// been measured, so a core that asks right after scheduling a readout
// receives that readout's result. This is the feedback path of fast reset
// and of conditional gates on another qubit. Ids >= NQ are not connected
// to any external computation in this design and answer 0 at once.
// The paper gives the interface idea (a special instruction stalls the
// core until the result returns); the wait-while-busy rule is this
// design's choice.
// Handshake: the core raises req[c] with id[c] and holds both until
// ack[c]; ack[c] is a one-clock pulse and data[c] is valid with it.
// Timing: ack follows one clock after the result is ready.
module fproc #(
  parameter int NC = 15,
  parameter int NQ = 15
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NQ-1:0]        meas_valid,
  input  logic [NQ-1:0]        meas_state,
  input  logic [NQ-1:0]        meas_busy,
  input  logic [NC-1:0]        req,
  input  logic [NC-1:0][7:0]   id,
  output logic [NC-1:0]        ack,
  output logic [NC-1:0][31:0]  data
);
  localparam int QW = (NQ > 1) ? $clog2(NQ) : 1;
  logic [NQ-1:0] last, seen, ready;

  assign ready = seen & ~meas_busy & ~meas_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      last <= '0; seen <= '0; ack <= '0; data <= '0;
    end else begin
      for (int q = 0; q < NQ; q++)
        if (meas_valid[q]) begin
          last[q] <= meas_state[q];
          seen[q] <= 1'b1;
        end
      for (int c = 0; c < NC; c++) begin
        ack[c] <= 1'b0;
        if (req[c] && !ack[c]) begin
          if (32'(id[c]) >= NQ) begin
            ack[c]  <= 1'b1;
            data[c] <= '0;
          end else if (ready[id[c][QW-1:0]]) begin
            ack[c]  <= 1'b1;
            data[c] <= 32'(last[id[c][QW-1:0]]);
          end
        end
      end
    end
  end

  // a core must hold its request until it is answered
  for (genvar c = 0; c < NC; c++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) req[c] && !ack[c] |=> req[c]);
  end
endmodule
