// tb_fproc: requests wait for a first measurement and for a readout in
// flight, then return the latest state; ids beyond the qubits answer 0.
// Two cores and two qubits. The testbench holds req until ack, as a core
// does, and checks three things:
//   * how many clocks each request stalled;
//   * that ack lasts one clock;
//   * that the data is the state of the named qubit's newest measurement.
// Halting the core until the result returns is the paper's; the busy and
// seen rules are this design's.
module tb_fproc;
  localparam int NC = 2, NQ = 2;
  logic clk = 0, rst_n = 0;
  logic [NQ-1:0] meas_valid = 0, meas_state = 0, meas_busy = 0;
  logic [NC-1:0] req = 0, ack;
  logic [NC-1:0][7:0] id = '0;
  logic [NC-1:0][31:0] data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  fproc #(.NC(NC), .NQ(NQ)) dut (.*);

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  // hold a request from core c until ack, return data and wait time
  task automatic ask(input int c, input int q, output int d, output int waited);
    @(negedge clk) req[c] = 1; id[c] = 8'(q);
    waited = 0;
    do begin @(negedge clk); waited++; end while (!ack[c] && waited < 50);
    d = int'(data[c]);
    @(posedge clk) req[c] <= 0;   // held through the ack clock
  endtask

  initial begin
    int d, w;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // never measured: core 0 waits until qubit 1 reports |1>
    fork
      ask(0, 1, d, w);
      begin repeat (6) @(negedge clk); meas_state[1] = 1; meas_valid[1] = 1; @(negedge clk) meas_valid[1] = 0; end
    join
    chk(d == 1 && w >= 7, "first result after first measurement");
    // measured, not busy: answer after one clock
    ask(1, 1, d, w);
    chk(d == 1 && w == 1, "immediate answer");
    // readout in flight: wait for it, receive the new state
    meas_busy[1] = 1;
    fork
      ask(0, 1, d, w);
      begin repeat (5) @(negedge clk); meas_busy[1] = 0; meas_state[1] = 0; meas_valid[1] = 1; @(negedge clk) meas_valid[1] = 0; end
    join
    chk(d == 0 && w >= 6, "waits for the readout in flight");
    // both cores read the same qubit at once (feed-forward to another core)
    fork
      begin int d0, w0; ask(0, 1, d0, w0); chk(d0 == 0 && w0 == 1, "core 0 shared read"); end
      begin int d1, w1; ask(1, 1, d1, w1); chk(d1 == 0 && w1 == 1, "core 1 shared read"); end
    join
    // unconnected function id
    ask(1, 9, d, w);
    chk(d == 0 && w == 1, "unconnected id");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
