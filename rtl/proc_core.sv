// proc_core: one core of the distributed processor.
//
// Each qubit has its own small core. It runs a program of 128-bit
// instructions (qubic_pkg::instr_t) held in its command buffer and does
// two jobs:
//   * timed pulses: OP_PULSE carries a 72-bit pulse command and a time.
//     The core waits until its time reference qclk reaches that time and
//     then hands the command to a generator (cmd.elem picks which). qclk
//     counts DSP clocks from the start of the program.
//   * control flow on a 16 x 32-bit register bank with a signed ALU
//     (add, sub, compares). ALU results can be written to a register,
//     added to qclk (OP_INC_QCLK, e.g. to rewind time in a loop) or used
//     as the instruction pointer (conditional jump, computed jump).
// Two instructions reach outside the core: OP_REG_FPROC / OP_JUMP_FPROC
// ask the function processor for a result (a measured qubit state) and
// stall until it answers, then store it or branch on it; OP_SYNC stalls
// until every core in the imm mask has arrived and then clears qclk.
//
// The paper gives the register bank size and width, the ALU operations,
// the 72-bit timed command, the qclk reference, the function-processor and
// sync instructions and the cycle counts. The instruction encoding and the
// four-state sequencer below are this design's.
// Timing: FETCH, DECODE, EXEC, COMMIT -> every instruction takes 4 clocks
// when it does not wait (the paper quotes >= 4 for pulses and 4-7 for most
// others). A pulse command leaves on cmd_valid the clock after the COMMIT
// in which qclk >= time, i.e. at qclk == time + 1 when the core was early.
// fproc and sync instructions take 5 clocks or more.
// start (one clock) clears pc, qclk and the registers and runs from 0;
// done_o stays high after OP_DONE until the next start.
module proc_core
  import qubic_pkg::*;
#(
  parameter int NC         = 15,
  parameter int PROG_DEPTH = 1024
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  // command buffer, local-bus side (4 lanes of 32 bits per instruction)
  input  logic                 prog_we,
  input  logic                 prog_re,
  input  logic [$clog2(PROG_DEPTH)+1:0] prog_addr,
  input  logic [31:0]          prog_wdata,
  output logic [31:0]          prog_rdata,
  output logic                 prog_rvalid,
  // pulse commands
  output logic                 cmd_valid,
  output pulse_cmd_t           cmd,
  // function processor
  output logic                 fproc_req,
  output logic [7:0]           fproc_id,
  input  logic                 fproc_ack,
  input  logic [31:0]          fproc_data,
  // synchronisation
  output logic                 sync_req,
  output logic [NC-1:0]        sync_mask,
  input  logic                 sync_release,
  // status
  output logic [31:0]          qclk_o,
  output logic                 done_o,
  output logic                 running_o
);
  localparam int PW = $clog2(PROG_DEPTH);

  typedef enum logic [2:0] {S_HALT, S_FETCH, S_DECODE, S_EXEC, S_COMMIT} state_e;

  state_e                 state;
  logic [PW-1:0]          pc;
  logic signed [31:0]     qclk;
  logic signed [31:0]     regs [NREGS];
  instr_t                 ir;
  logic [INSTR_W-1:0]     prog_word;
  logic signed [31:0]     opa, opb, alu_a, alu_y, alu_y_r, fp_data;
  logic [31:0]            imm;
  logic [PW-1:0]          jaddr;
  logic [31:0]            ptime;
  logic                   is_fproc;

  lb_ram #(.DW(INSTR_W), .DEPTH(PROG_DEPTH)) u_prog (
    .clk, .a_we(prog_we), .a_re(prog_re), .a_addr(prog_addr), .a_wdata(prog_wdata),
    .a_rdata(prog_rdata), .a_rvalid(prog_rvalid),
    .b_addr(pc), .b_rdata(prog_word));

  assign imm      = ir.body[31:0];
  assign jaddr    = ir.body[32 +: PW];
  assign ptime    = ir.body[31:0];
  assign is_fproc = (ir.op == OP_REG_FPROC) || (ir.op == OP_JUMP_FPROC);

  assign alu_a = is_fproc ? $signed(fproc_data) : opa;

  alu #(.W(32)) u_alu (.op(ir.alu_op), .a(alu_a), .b(opb), .y(alu_y));

  assign fproc_req = (state == S_EXEC) && is_fproc;
  assign fproc_id  = ir.body[55:48];
  assign sync_req  = (state == S_EXEC) && (ir.op == OP_SYNC);
  assign sync_mask = imm[NC-1:0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_HALT; pc <= '0; qclk <= '0; ir <= '0; opa <= '0; opb <= '0;
      alu_y_r <= '0; fp_data <= '0; cmd_valid <= 1'b0; cmd <= '0; done_o <= 1'b0;
      for (int r = 0; r < NREGS; r++) regs[r] <= '0;
    end else if (start) begin
      state <= S_FETCH; pc <= '0; qclk <= '0; cmd_valid <= 1'b0; done_o <= 1'b0;
      for (int r = 0; r < NREGS; r++) regs[r] <= '0;
    end else begin
      qclk      <= qclk + 1;
      cmd_valid <= 1'b0;
      unique case (state)
        S_HALT: ;
        S_FETCH: state <= S_DECODE;
        S_DECODE: begin
          instr_t w;
          w = instr_t'(prog_word);
          ir    <= w;
          opa   <= regs[w.rs1];
          opb   <= w.imm_sel ? $signed(w.body[31:0]) : regs[w.rs2];
          state <= S_EXEC;
        end
        S_EXEC: begin
          if (is_fproc) begin
            if (fproc_ack) begin
              fp_data <= fproc_data;
              alu_y_r <= alu_y;
              state   <= S_COMMIT;
            end
          end else if (ir.op == OP_SYNC) begin
            if (sync_release) begin
              qclk  <= '0;
              state <= S_COMMIT;
            end
          end else begin
            alu_y_r <= alu_y;
            state   <= S_COMMIT;
          end
        end
        S_COMMIT: begin
          state <= S_FETCH;
          pc    <= pc + 1'b1;
          unique case (ir.op)
            OP_PULSE: begin
              if ($signed(qclk - ptime) >= 0) begin
                cmd_valid <= 1'b1;
                cmd       <= pulse_cmd_t'(ir.body[103:32]);
              end else begin
                state <= S_COMMIT;
                pc    <= pc;
              end
            end
            OP_IDLE: begin
              if ($signed(qclk - imm) < 0) begin
                state <= S_COMMIT;
                pc    <= pc;
              end
            end
            OP_REG_ALU:   regs[ir.rd] <= alu_y_r;
            OP_REG_FPROC: regs[ir.rd] <= fp_data;
            OP_JUMP_I:    pc <= jaddr;
            OP_JUMP_COND, OP_JUMP_FPROC: if (alu_y_r != 0) pc <= jaddr;
            OP_JUMP_ALU:  pc <= alu_y_r[PW-1:0];
            OP_INC_QCLK:  qclk <= qclk + 1 + alu_y_r;
            OP_DONE: begin
              state  <= S_HALT;
              pc     <= pc;
              done_o <= 1'b1;
            end
            default: ;
          endcase
        end
        default: state <= S_HALT;
      endcase
    end
  end

  assign qclk_o    = qclk;
  assign running_o = (state != S_HALT);
endmodule
