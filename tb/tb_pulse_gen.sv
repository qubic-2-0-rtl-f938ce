// tb_pulse_gen: envelope x carrier x amplitude against a model; checks the
// 8-clock command latency, the pulse length and zero output outside it.
// A 4-samples-per-clock generator gets a complex envelope (points 0..63
// are 16384, the rest random) and frequency words (entry 0 is DC, entry 1
// is 0x10000000) over the local bus. Five pulses of different lengths,
// amplitudes, phases and frequencies are played, including a zero-length
// one. Each sample must equal exactly
// sat16((eI*cos - eQ*sin) >>> 15) * amp >>> 16, with the carrier from the
// same table indexed by the global time count. The complex multiplication
// is the paper's; the latency and the envelope-point-per-clock rule are
// this design's.
module tb_pulse_gen;
  import qubic_pkg::*;
  import qubic_asm_pkg::*;
  localparam int SPC = 4;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0;
  pulse_cmd_t cmd = '0;
  logic [31:0] tcount = 0;
  logic env_we = 0, env_re = 0, freq_we = 0, freq_re = 0, lb_rvalid, active_o;
  logic [15:0] lb_addr = 0;
  logic [31:0] lb_wdata = 0, lb_rdata;
  sample_t dac_o [SPC];
  int checks = 0, failures = 0;
  logic [31:0] env [256];
  logic [31:0] fw [16];
  always #5 clk = ~clk;
  always @(posedge clk) tcount <= tcount + 1;

  pulse_gen #(.SPC(SPC), .ENV_DEPTH(256), .FREQ_DEPTH(16)) dut (.*);

  function automatic int model(longint fword, int ph, int amp, logic [31:0] e, longint t, int k);
    int c, s, d;
    longint p;
    ref_carrier(fword, ph, t, SPC, k, c, s);
    p = (longint'($signed(e[31:16])) * c - longint'($signed(e[15:0])) * s) >>> 15;
    d = (p > 32767) ? 32767 : (p < -32768) ? -32768 : int'(p);
    return int'((longint'(d) * amp) >>> 16);
  endfunction

  task automatic play(input int fidx, input int ph, input int amp, input int len, input int addr);
    int t0, first, n;
    @(negedge clk);
    cmd = mkcmd(ELEM_QDRV, amp, ph, fidx, len, addr);
    cmd_valid = 1;
    t0 = int'(tcount);
    @(negedge clk) cmd_valid = 0;
    first = -1; n = 0;
    for (int c = 1; c < len + 20; c++) begin
      if (active_o) begin
        if (first < 0) first = int'(tcount) - t0;
        for (int k = 0; k < SPC; k++) begin
          int e;
          e = model(fw[fidx], ph, amp, env[addr + n], tcount, k);
          checks++;
          if (int'(dac_o[k]) != e) begin
            failures++;
            $display("FAIL: n %0d k %0d got %0d exp %0d", n, k, dac_o[k], e);
          end
        end
        n++;
      end else begin
        for (int k = 0; k < SPC; k++) if (dac_o[k] != 0) begin
          failures++; $display("FAIL: output outside pulse");
        end
      end
      @(negedge clk);
    end
    checks += 2;
    if (len > 0 && first != 8) begin failures++; $display("FAIL: latency %0d, expected 8", first); end
    if (n != len) begin failures++; $display("FAIL: length %0d, expected %0d", n, len); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      env[a] = (a < 64) ? {16'sd16384, 16'sd0} : {16'($urandom), 16'($urandom)};
      env_we = 1; lb_addr = 16'(a); lb_wdata = env[a];
    end
    for (int f = 0; f < 16; f++) begin
      @(negedge clk);
      env_we = 0;
      fw[f] = (f == 0) ? 0 : (f == 1) ? 32'h1000_0000 : $urandom;
      freq_we = 1; lb_addr = 16'(f); lb_wdata = fw[f];
    end
    @(negedge clk) freq_we = 0;
    // read back one envelope point
    @(negedge clk) env_re = 1; lb_addr = 16'd70;
    @(negedge clk) env_re = 0;
    checks++;
    if (!lb_rvalid || lb_rdata !== env[70]) begin failures++; $display("FAIL: env read-back"); end
    play(0, 0, 32768, 10, 5);          // DC carrier: 0.5 * 0.5 scale
    play(1, 0, 65535, 16, 0);           // fs/16 carrier
    play(5, 4321, 40000, 40, 100);      // random envelope, frequency, phase
    play(9, 77777, 12345, 1, 200);
    play(3, 0, 65535, 0, 0);            // zero length: nothing
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
