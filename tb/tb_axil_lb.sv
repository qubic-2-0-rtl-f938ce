// tb_axil_lb: AXI4-Lite writes and reads through the bridge to a
// local-bus memory that answers reads after two clocks; addresses at or
// above 0x100 never answer and must end in SLVERR.
// AW and W are driven together. bready is held off for 2 clocks, during
// which bvalid must stay high; rready is raised after rvalid. 20 random
// writes must each reach the local bus exactly once, and every 5th word is
// read back with OKAY. A read of 0x400 must give SLVERR and 0xDEADBEEF
// after the timeout. The bridge is named in the paper; its protocol is
// this design's.
module tb_axil_lb;
  import qubic_pkg::*;
  logic clk = 0, rst_n = 0;
  axil_req_t s_req;
  axil_rsp_t s_rsp;
  lb_req_t lb_req;
  lb_rsp_t lb_rsp;
  logic [31:0] mem [64];
  logic [1:0] rpend;
  logic [5:0] raddr;
  int checks = 0, failures = 0, nwr = 0;
  always #5 clk = ~clk;
  axil_lb #(.ADDR_W(LB_AW), .TIMEOUT(16)) dut (.*);

  // local-bus slave model: words 0..63, reads answer after 2 clocks,
  // addresses >= 0x100 never answer
  always_ff @(posedge clk) begin
    lb_rsp.rvalid <= 1'b0;
    rpend <= {rpend[0], lb_req.rd && lb_req.addr < 24'h100};
    if (lb_req.rd) raddr <= lb_req.addr[5:0];
    if (rpend[1]) begin lb_rsp.rvalid <= 1'b1; lb_rsp.rdata <= mem[raddr]; end
    if (lb_req.wr) begin mem[lb_req.addr[5:0]] <= lb_req.wdata; nwr <= nwr + 1; end
  end

  task automatic axi_write(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk);
    s_req.awvalid = 1; s_req.awaddr = a; s_req.wvalid = 1; s_req.wdata = d; s_req.wstrb = '1;
    do @(negedge clk); while (!s_rsp.awready);
    s_req.awvalid = 0; s_req.wvalid = 0;
    s_req.bready = 0;
    do @(negedge clk); while (!s_rsp.bvalid);
    repeat (2) @(negedge clk);   // hold off bready: bvalid must stay
    s_req.bready = 1;
    @(negedge clk) s_req.bready = 0;
  endtask

  task automatic axi_read(input logic [31:0] a, output logic [31:0] d, output logic [1:0] r);
    @(negedge clk);
    s_req.arvalid = 1; s_req.araddr = a;
    do @(negedge clk); while (!s_rsp.arready);
    s_req.arvalid = 0;
    do @(negedge clk); while (!s_rsp.rvalid);
    d = s_rsp.rdata; r = s_rsp.rresp;
    s_req.rready = 1;
    @(negedge clk) s_req.rready = 0;
  endtask

  initial begin
    logic [31:0] d, model [64];
    logic [1:0] r;
    s_req = '0;
    for (int i = 0; i < 64; i++) begin mem[i] = 0; model[i] = 0; end
    rpend = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 20; i++) begin
      int w;
      w = $urandom_range(63);
      model[w] = $urandom;
      axi_write(32'(w * 4), model[w]);
    end
    checks++;
    if (nwr != 20) begin failures++; $display("FAIL: %0d local-bus writes", nwr); end
    for (int w = 0; w < 64; w += 5) begin
      axi_read(32'(w * 4), d, r);
      checks++;
      if (d !== model[w] || r != 2'b00) begin failures++; $display("FAIL: read %0d got %h exp %h", w, d, model[w]); end
    end
    axi_read(32'h400, d, r);
    checks++;
    if (r != 2'b10 || d != 32'hDEADBEEF) begin failures++; $display("FAIL: no SLVERR on timeout"); end
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
