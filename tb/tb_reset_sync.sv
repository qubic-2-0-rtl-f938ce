// tb_reset_sync: checks immediate assertion and two-clock release.
// arst_n is dropped between clock edges: rst_n must fall at once, without
// waiting for a clock. After arst_n rises, rst_n must stay low for the
// first clock edge and be high after the second (STAGES = 2). The
// asynchronous reset block is named in the paper; the two-flop
// synchroniser is this design's.
module tb_reset_sync;
  logic clk = 0, arst_n = 0, rst_n;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  reset_sync dut (.clk, .arst_n, .rst_n);

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    chk(rst_n == 0, "held in reset");
    @(negedge clk) arst_n = 1;
    @(posedge clk); #1 chk(rst_n == 0, "still low after 1 edge");
    @(posedge clk); #1 chk(rst_n == 1, "released after 2 edges");
    repeat (3) @(posedge clk);
    #2 arst_n = 0;
    #1 chk(rst_n == 0, "asserts without a clock edge");
    @(negedge clk) arst_n = 1;
    repeat (2) @(posedge clk); #1 chk(rst_n == 1, "released again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
