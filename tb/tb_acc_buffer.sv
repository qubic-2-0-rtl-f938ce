// tb_acc_buffer: shots are stored in order, read back as I/Q pairs, the
// count follows and clear restarts the buffer.
// A 16-entry buffer receives 10 random I/Q results on valid_i strobes.
// Over the local bus, word 2n must be I and 2n+1 must be Q of shot n
// (rdata one clock after re), and count must be 10. After clear, one more
// shot must give count 1 and be read back at entry 0. The buffer's purpose
// is the paper's; the layout and the stop-when-full behaviour are this
// design's.
module tb_acc_buffer;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0, clear = 0, valid_i = 0, lb_re = 0, lb_rvalid;
  logic signed [31:0] i_i = 0, q_i = 0;
  logic [4:0] lb_addr = 0;
  logic [31:0] lb_rdata, count;
  logic [31:0] mi [DEPTH], mq [DEPTH];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  acc_buffer #(.DEPTH(DEPTH)) dut (.*);

  task automatic rd(input int a, input logic [31:0] e);
    @(negedge clk) lb_re = 1; lb_addr = 5'(a);
    @(negedge clk) lb_re = 0;
    checks++;
    if (!lb_rvalid || lb_rdata !== e) begin failures++; $display("FAIL: addr %0d got %h exp %h", a, lb_rdata, e); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 10; n++) begin
      @(negedge clk);
      valid_i = 1; i_i = $urandom; q_i = $urandom; mi[n] = i_i; mq[n] = q_i;
      @(negedge clk) valid_i = 0;
    end
    checks++;
    if (count != 10) begin failures++; $display("FAIL: count %0d", count); end
    for (int n = 0; n < 10; n++) begin rd(2*n, mi[n]); rd(2*n+1, mq[n]); end
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0; valid_i = 1; i_i = 32'h1234; q_i = 32'h5678;
    @(negedge clk) valid_i = 0;
    checks++;
    if (count != 1) begin failures++; $display("FAIL: count after clear %0d", count); end
    rd(0, 32'h1234); rd(1, 32'h5678);
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
