// tb_ptp_ts: two units with a known counter offset and link delay run the
// Sync / Delay_Req exchange; the stamps must give back that delay and
// offset through delay = ((t4-t1)-(t3-t2))/2, offset = ((t2-t1)-(t4-t3))/2.
module tb_ptp_ts;
  localparam int DELAY = 13, OFFSET_START = 37;
  logic clk = 0, rst_p = 0, rst_s = 0;
  logic ptx = 0, prx = 0, stx = 0, srx = 0, pdr = 0, sdr = 0;
  logic [63:0] pnow, snow;
  logic [3:0][63:0] pst, sst;
  logic [3:0] pv, sv;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ptp_ts #(.TS_W(64)) u_pri (.clk, .rst_n(rst_p), .clear(1'b0), .tx_stb(ptx), .rx_stb(prx),
                             .msg_delay_req(pdr), .now(pnow), .stamp(pst), .stamp_valid(pv));
  ptp_ts #(.TS_W(64)) u_sec (.clk, .rst_n(rst_s), .clear(1'b0), .tx_stb(stx), .rx_stb(srx),
                             .msg_delay_req(sdr), .now(snow), .stamp(sst), .stamp_valid(sv));

  initial begin
    longint t1, t2, t3, t4, dly, off;
    @(negedge clk) rst_p = 1;
    repeat (OFFSET_START) @(negedge clk);
    rst_s = 1;                        // secondary counter lags by OFFSET_START
    repeat (20) @(negedge clk);
    ptx = 1; pdr = 0;                 // Sync leaves the primary
    @(negedge clk) ptx = 0;
    repeat (DELAY - 1) @(negedge clk);
    srx = 1; sdr = 0;                 // ... arrives DELAY clocks later
    @(negedge clk) srx = 0;
    repeat (30) @(negedge clk);
    stx = 1; sdr = 1;                 // Delay_Req
    @(negedge clk) stx = 0;
    repeat (DELAY - 1) @(negedge clk);
    prx = 1; pdr = 1;
    @(negedge clk) prx = 0;
    @(negedge clk);
    t1 = longint'(pst[0]); t2 = longint'(sst[1]); t3 = longint'(sst[2]); t4 = longint'(pst[3]);
    dly = ((t4 - t1) - (t3 - t2)) / 2;
    off = ((t2 - t1) - (t4 - t3)) / 2;
    checks += 4;
    if (pv != 4'b1001 || sv != 4'b0110) begin failures++; $display("FAIL: flags %b %b", pv, sv); end
    if (dly != DELAY) begin failures++; $display("FAIL: delay %0d", dly); end
    if (off != -OFFSET_START) begin failures++; $display("FAIL: offset %0d", off); end
    if (longint'(pnow) - longint'(snow) != OFFSET_START) begin failures++; $display("FAIL: counters"); end
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
