// tb_lb_ram: 128-bit words written lane by lane, read on both ports.
// Port A (local bus) writes random 32-bit lanes into all 16 entries.
// Each word is then read once, in reverse order: port B (the datapath
// port) reads the whole 128-bit word and port A reads lane w%4, both
// valid one clock later (rvalid on port A). Both are compared with a copy
// kept in the testbench. The buffer's use for commands and envelopes is
// the paper's; the lane addressing is this design's.
module tb_lb_ram;
  logic clk = 0;
  logic a_we = 0, a_re = 0, a_rvalid;
  logic [5:0] a_addr = '0;
  logic [31:0] a_wdata = '0, a_rdata;
  logic [3:0] b_addr = '0;
  logic [127:0] b_rdata;
  logic [127:0] model [16];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  lb_ram #(.DW(128), .DEPTH(16)) dut (.*);

  initial begin
    for (int w = 0; w < 16; w++)
      for (int l = 0; l < 4; l++) begin
        @(negedge clk);
        a_we = 1; a_addr = 6'(w*4 + l); a_wdata = $urandom;
        model[w][l*32 +: 32] = a_wdata;
      end
    @(negedge clk) a_we = 0;
    for (int w = 15; w >= 0; w--) begin
      @(negedge clk) b_addr = 4'(w); a_re = 1; a_addr = 6'(w*4 + (w % 4));
      @(negedge clk);
      checks += 2;
      if (b_rdata !== model[w]) begin failures++; $display("FAIL: b word %0d", w); end
      if (a_rdata !== model[w][(w%4)*32 +: 32] || !a_rvalid) begin failures++; $display("FAIL: a lane %0d", w); end
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
