// tb_dds: carrier samples against a cosine model, including the 3-clock
// latency and the time-referenced phase.
// With 4 samples per clock, the time count steps as cyc*7+3 and the
// frequency word and phase are re-randomised every 50 clocks, for 300
// clocks. Every cos/sin output must equal exactly the reference carrier
// (same table, same phase arithmetic) computed from the inputs applied 3
// clocks earlier. A DDS carrier is the paper's; the table size and the
// phase reference to the time counter are this design's.
module tb_dds;
  import qubic_pkg::*;
  import qubic_asm_pkg::*;
  localparam int SPC = 4;
  logic clk = 0;
  logic [31:0] fword = 0, tcount = 0;
  logic [16:0] phase = 0;
  sample_t cos_o [SPC];
  sample_t sin_o [SPC];
  int checks = 0, failures = 0;
  longint hist_f [int], hist_p [int], hist_t [int];
  int cyc = 0;
  always #5 clk = ~clk;
  dds #(.SPC(SPC)) dut (.clk, .fword, .phase, .tcount, .cos_o, .sin_o);

  initial begin
    for (cyc = 0; cyc < 300; cyc++) begin
      @(negedge clk);
      // outputs now reflect the inputs of 3 clocks ago
      if (cyc >= 4) begin
        for (int k = 0; k < SPC; k++) begin
          int c, s;
          ref_carrier(hist_f[cyc-3], hist_p[cyc-3], hist_t[cyc-3], SPC, k, c, s);
          checks++;
          if (int'(cos_o[k]) != c || int'(sin_o[k]) != s) begin
            failures++;
            $display("FAIL: cyc %0d k %0d got %0d/%0d exp %0d/%0d", cyc, k, cos_o[k], sin_o[k], c, s);
          end
        end
      end
      if (cyc % 50 == 0) begin fword = $urandom; phase = 17'($urandom); end
      tcount = 32'(cyc * 7 + 3);
      hist_f[cyc] = fword; hist_p[cyc] = phase; hist_t[cyc] = tcount;
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
