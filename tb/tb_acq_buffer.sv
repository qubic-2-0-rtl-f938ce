// tb_acq_buffer: a trigger records DEPTH clocks of the selected source;
// a second trigger during the capture is ignored.
// Three 64-bit sources carry distinct counting patterns, so each entry
// shows which clock and which source it came from. After a trigger with
// sel, entries 0..DEPTH-1 (read as 32-bit lanes) must be that source on
// the clocks right after the trigger. busy must cover exactly DEPTH
// clocks. Live capture of ADC/DLO/DAC data is the paper's; the one-shot
// trigger is this design's.
module tb_acq_buffer;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0, trigger = 0, busy, lb_re = 0, lb_rvalid;
  logic [1:0] sel = 0;
  logic [2:0][63:0] src;
  logic [4:0] lb_addr = 0;
  logic [31:0] lb_rdata;
  logic [63:0] exp_d [DEPTH];
  int checks = 0, failures = 0, cyc = 0, busy_n = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always_comb for (int s = 0; s < 3; s++) src[s] = {32'(s), 32'(cyc)};
  acq_buffer #(.DW(64), .NSRC(3), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 2; s >= 1; s--) begin
      int c0;
      @(negedge clk) trigger = 1; sel = 2'(s);
      c0 = cyc + 1;
      @(negedge clk) trigger = 0;
      busy_n = 0;
      while (busy) begin
        busy_n++;
        if (busy_n == 5) begin trigger = 1; sel = 0; end else trigger = 0;
        @(negedge clk);
      end
      trigger = 0;
      checks++;
      if (busy_n != DEPTH) begin failures++; $display("FAIL: capture length %0d", busy_n); end
      for (int n = 0; n < DEPTH; n++)
        for (int l = 0; l < 2; l++) begin
          logic [63:0] e;
          e = {32'(s), 32'(c0 + n)};
          @(negedge clk) lb_re = 1; lb_addr = 5'(2*n + l);
          @(negedge clk) lb_re = 0;
          checks++;
          if (!lb_rvalid || lb_rdata !== e[l*32 +: 32]) begin
            failures++; $display("FAIL: src %0d entry %0d lane %0d got %h exp %h", s, n, l, lb_rdata, e[l*32 +: 32]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
