// tb_sync_barrier: cores 0 and 2 synchronise; each is released only when
// both wait, on the same clock; core 1 (not in the set) is unaffected.
// Three cores, three rounds. Cores 0 and 2 arrive with different delays,
// in either order; both must get release_o on the same clock. Each holds
// req through that clock, as the core does. Core 1 has only itself in its
// mask and must be released before the others. Release-when-all-arrive is
// the paper's; the mask form and registered release are this design's.
module tb_sync_barrier;
  localparam int NC = 3;
  logic clk = 0, rst_n = 0;
  logic [NC-1:0] req = 0, release_o;
  logic [NC-1:0][NC-1:0] mask = '0;
  int checks = 0, failures = 0, cyc = 0;
  int rel_at [NC];
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  sync_barrier #(.NC(NC)) dut (.*);

  // a core arrives after `delay` clocks and waits for release
  task automatic arrive(input int c, input int delay, input logic [NC-1:0] m);
    repeat (delay) @(negedge clk);
    req[c] = 1; mask[c] = m;
    do @(negedge clk); while (!release_o[c]);
    rel_at[c] = cyc;
    @(posedge clk) req[c] <= 0;   // held through the release clock
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      fork
        arrive(0, 2 + 5*round, 3'b101);
        arrive(2, 9 - 3*round, 3'b101);
        arrive(1, 1, 3'b010);
      join
      checks += 2;
      if (rel_at[0] != rel_at[2]) begin failures++; $display("FAIL: not released together"); end
      if (rel_at[1] >= rel_at[0]) begin failures++; $display("FAIL: core 1 held by others"); end
    end
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
