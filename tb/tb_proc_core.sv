// tb_proc_core: runs a program that exercises every instruction: ALU
// register writes, timed pulses (early and late), a counted loop, a qclk
// increment, function-processor read and branch, sync, computed jump and
// done. Checks register contents, the qclk value at which each command
// leaves, the 4-clock issue rate of back-to-back pulses and the stall on
// the function processor and sync handshakes.
module tb_proc_core;
  import qubic_pkg::*;
  import qubic_asm_pkg::*;
  localparam int NC = 2, PD = 64;
  logic clk = 0, rst_n = 0, start = 0;
  logic prog_we = 0, prog_re = 0, prog_rvalid;
  logic [$clog2(PD)+1:0] prog_addr = '0;
  logic [31:0] prog_wdata = 0, prog_rdata;
  logic cmd_valid;
  pulse_cmd_t cmd;
  logic fproc_req, fproc_ack = 0;
  logic [7:0] fproc_id;
  logic [31:0] fproc_data = 0;
  logic sync_req, sync_release = 0;
  logic [NC-1:0] sync_mask;
  logic [31:0] qclk_o;
  logic done_o, running_o;
  int checks = 0, failures = 0, cyc = 0;
  instr_t prog [PD];
  pulse_cmd_t ca, cb, cc, cd;
  int ncmd = 0;
  pulse_cmd_t got_cmd [8];
  int got_q [8], got_c [8];
  int fp_wait = 0, sync_wait = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  proc_core #(.NC(NC), .PROG_DEPTH(PD)) dut (.*);

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  // record commands
  always @(negedge clk) if (cmd_valid && ncmd < 8) begin
    got_cmd[ncmd] = cmd; got_q[ncmd] = int'(qclk_o); got_c[ncmd] = cyc; ncmd++;
  end

  // function processor model: answers 3 clocks after the request
  // (function 1 -> 7, function 0 -> 1)
  initial forever begin
    @(negedge clk);
    if (fproc_req) begin
      repeat (2) begin @(negedge clk); fp_wait++; end
      fproc_ack = 1; fproc_data = (fproc_id == 1) ? 7 : 1;
      @(negedge clk) fproc_ack = 0;
      @(negedge clk);
    end
  end

  // sync partner arrives 6 clocks after this core
  initial forever begin
    @(negedge clk);
    if (sync_req) begin
      chk(sync_mask == 2'b01, "sync mask");
      repeat (5) begin @(negedge clk); sync_wait++; end
      sync_release = 1;
      @(negedge clk) sync_release = 0;
      @(negedge clk);
    end
  end

  initial begin
    ca = mkcmd(ELEM_QDRV, 100, 1, 2, 3, 4);
    cb = mkcmd(ELEM_RDRV, 200, 5, 6, 7, 8);
    cc = mkcmd(ELEM_RDLO, 300, 9, 10, 11, 12);
    cd = mkcmd(ELEM_QDRV, 400, 13, 14, 15, 16);
    for (int i = 0; i < PD; i++) prog[i] = i_done();
    prog[0]  = i_alui(1, 0, ALU_ADD, 5);
    prog[1]  = i_alui(2, 1, ALU_SUB, 7);
    prog[2]  = i_alur(3, 1, ALU_ADD, 2);
    prog[3]  = i_pulse(ca, 40);
    prog[4]  = i_pulse(cb, 10);
    prog[5]  = i_alui(4, 4, ALU_ADD, 1);
    prog[6]  = i_jcond(4, ALU_LT, 3, 5);
    prog[7]  = i_incq(-100);
    prog[8]  = i_pulse(cc, 10);
    prog[9]  = i_regfproc(5, 1);
    prog[10] = i_jfproc(0, ALU_EQ, 1, 12);
    prog[11] = i_alui(6, 0, ALU_ADD, 111);
    prog[12] = i_sync(1);
    prog[13] = i_pulse(cd, 20);
    prog[14] = i_jalu(0, 16);
    prog[15] = i_alui(7, 0, ALU_ADD, 99);
    prog[16] = i_alui(8, 2, ALU_LT, 0);
    prog[17] = i_done();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 20; i++)
      for (int l = 0; l < 4; l++) begin
        @(negedge clk);
        prog_we = 1; prog_addr = 8'(i*4 + l); prog_wdata = prog[i][l*32 +: 32];
      end
    @(negedge clk) prog_we = 0; prog_re = 1; prog_addr = 8'(13*4 + 3);
    @(negedge clk) prog_re = 0;
    chk(prog_rvalid && prog_rdata == prog[13][127:96], "program read-back");
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done_o && cyc < 3000) @(negedge clk);
    chk(done_o && !running_o, "done");
    chk(dut.regs[1] == 5 && dut.regs[2] == -2 && dut.regs[3] == 3, "alu add/sub");
    chk(dut.regs[4] == 3, "loop ran three times");
    chk(dut.regs[5] == 7, "fproc value to register");
    chk(dut.regs[6] == 0, "fproc branch taken");
    chk(dut.regs[7] == 0, "computed jump");
    chk(dut.regs[8] == 1, "signed compare");
    chk(ncmd == 4, $sformatf("%0d commands", ncmd));
    chk(got_cmd[0] == ca && got_q[0] == 41, $sformatf("early pulse at qclk %0d", got_q[0]));
    chk(got_cmd[1] == cb && got_c[1] - got_c[0] == 4, "late pulse 4 clocks after previous");
    chk(got_cmd[2] == cc && got_q[2] == 11 && got_c[2] - got_c[1] == 66,
        $sformatf("pulse after qclk rewind at %0d, %0d clocks", got_q[2], got_c[2] - got_c[1]));
    chk(got_cmd[3] == cd && got_q[3] == 21, $sformatf("pulse after sync at %0d", got_q[3]));
    chk(fp_wait == 4 && sync_wait == 5, "handshakes stalled the core");
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
