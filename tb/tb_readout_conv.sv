// tb_readout_conv: mixes a synthetic readout signal with the digital LO and
// checks the integrated I/Q, the window position (5 clocks after the
// command) and the busy flag.
module tb_readout_conv;
  import qubic_pkg::*;
  import qubic_asm_pkg::*;
  localparam int SPC = 4;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0;
  pulse_cmd_t cmd = '0;
  logic [31:0] tcount = 0;
  sample_t adc_i [SPC];
  logic freq_we = 0, freq_re = 0, lb_rvalid, iq_valid, busy_o;
  logic [15:0] lb_addr = 0;
  logic [31:0] lb_wdata = 0, lb_rdata;
  logic signed [31:0] i_o, q_o;
  sample_t mix_i_o [SPC];
  int checks = 0, failures = 0;
  logic [31:0] fw [16];
  always #5 clk = ~clk;
  always @(posedge clk) tcount <= tcount + 1;

  readout_conv #(.SPC(SPC), .FREQ_DEPTH(16)) dut (.*);

  task automatic measure(input int fidx, input int ph, input int len, input int amp, input longint sig_f);
    int t0;
    longint acc_i, acc_q;
    int got_at;
    bit got;
    @(negedge clk);
    cmd = mkcmd(ELEM_RDLO, 0, ph, fidx, len, 0);
    cmd_valid = 1;
    t0 = int'(tcount);
    acc_i = 0; acc_q = 0; got = 0; got_at = -1;
    for (int c = 0; c < len + 20; c++) begin
      // drive the signal for this clock and account for it in the model
      for (int k = 0; k < SPC; k++) begin
        int sc, ss, c2, s2;
        ref_carrier(sig_f, 0, tcount, SPC, k, sc, ss);
        adc_i[k] = sample_t'((amp * sc) >>> 15);
        if (int'(tcount) - t0 >= 5 && int'(tcount) - t0 < 5 + len) begin
          ref_carrier(fw[fidx], ph, tcount, SPC, k, c2, s2);
          acc_i += longint'(adc_i[k]) * c2;
          acc_q -= longint'(adc_i[k]) * s2;
        end
      end
      if (c == 1) begin
        checks++;
        if (!busy_o) begin failures++; $display("FAIL: busy not set"); end
      end
      if (iq_valid && !got) begin
        got = 1; got_at = int'(tcount) - t0;
        checks += 2;
        if (i_o != 32'(acc_i >>> 15) || q_o != 32'(acc_q >>> 15)) begin
          failures++; $display("FAIL: iq %0d %0d exp %0d %0d", i_o, q_o, acc_i >>> 15, acc_q >>> 15);
        end
        if (got_at != 5 + len + 2) begin failures++; $display("FAIL: result at %0d exp %0d", got_at, 5 + len + 2); end
      end
      @(negedge clk);
      cmd_valid = 0;
    end
    checks += 2;
    if (!got) begin failures++; $display("FAIL: no result"); end
    if (busy_o) begin failures++; $display("FAIL: busy stuck"); end
  endtask

  initial begin
    for (int k = 0; k < SPC; k++) adc_i[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 16; f++) begin
      @(negedge clk);
      fw[f] = (f == 1) ? 32'h0800_0000 : $urandom;
      freq_we = 1; lb_addr = 16'(f); lb_wdata = fw[f];
    end
    @(negedge clk) freq_we = 0; freq_re = 1; lb_addr = 16'd1;
    @(negedge clk) freq_re = 0;
    checks++;
    if (!lb_rvalid || lb_rdata !== fw[1]) begin failures++; $display("FAIL: freq read-back"); end
    measure(1, 0, 50, 20000, 32'h0800_0000);       // on-resonance: large I
    measure(1, 32768, 50, 20000, 32'h0800_0000);   // LO phase +90 degrees
    measure(4, 1234, 17, 30000, 32'h0123_4567);    // arbitrary
    measure(2, 0, 1, 10000, 32'h0800_0000);
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
