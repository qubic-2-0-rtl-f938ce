// qubic_pkg: types and constants shared by the qubit-control gateware.
//
// The design runs one small processor core per qubit. Each core issues
// 72-bit timed pulse commands to its signal generators (qubit drive,
// readout drive, readout down-conversion) and runs control flow on a
// 16 x 32-bit register file. This package holds:
//   * the pulse command layout (72 bits, as in the paper; the field split
//     inside those 72 bits is this design's own),
//   * the 128-bit instruction word and opcodes (own encoding; the paper
//     lists the instruction kinds but not their encoding),
//   * the local-bus request type used for every register/memory access,
//   * AXI4-Lite channel structs,
//   * a 1024-point cosine table built at elaboration time.
// Sample rates follow the paper: 500 MHz DSP clock, 8 GS/s DAC -> 16
// samples per clock, 2 GS/s ADC -> 4 samples per clock.
package qubic_pkg;

  localparam int SAMPLE_W = 16;   // DAC/ADC word (14-bit converters, 16-bit words)
  localparam int DAC_SPC  = 16;   // 8 GS/s / 500 MHz
  localparam int ADC_SPC  = 4;    // 2 GS/s / 500 MHz
  localparam int CMD_W    = 72;   // pulse command width (paper)
  localparam int DATA_W   = 32;   // register / ALU width (paper)
  localparam int NREGS    = 16;   // register bank size (paper)
  localparam int INSTR_W  = 128;
  localparam int LB_AW    = 24;   // local-bus word address width
  localparam int LUT_BITS = 10;   // carrier table resolution
  localparam int DDS_LAT  = 3;    // dds input-to-output latency in clocks

  typedef logic signed [SAMPLE_W-1:0] sample_t;

  // Destination element of a pulse command (two bits of the command).
  typedef enum logic [1:0] {
    ELEM_QDRV = 2'd0,   // qubit drive generator
    ELEM_RDRV = 2'd1,   // readout drive generator
    ELEM_RDLO = 2'd2,   // readout down-converter (digital LO + integrator)
    ELEM_NONE = 2'd3
  } elem_e;

  // 72-bit pulse command.
  typedef struct packed {
    logic [3:0]  rsvd;
    elem_e       elem;      // destination generator
    logic [15:0] amp;       // unsigned amplitude, 0xFFFF ~ 1.0
    logic [16:0] phase;     // carrier phase, 2*pi * phase / 2^17
    logic [8:0]  freq;      // index into the generator's frequency buffer
    logic [11:0] env_len;   // pulse length in DSP clocks (one envelope point per clock)
    logic [11:0] env_addr;  // first envelope point
  } pulse_cmd_t;

  typedef enum logic [7:0] {
    OP_NOP        = 8'h00,
    OP_PULSE      = 8'h01,  // wait until qclk >= time, then send the command
    OP_REG_ALU    = 8'h02,  // rd <= alu(rs1, rs2/imm)
    OP_JUMP_I     = 8'h03,  // pc <= addr
    OP_JUMP_COND  = 8'h04,  // if alu(rs1, rs2/imm) != 0 : pc <= addr
    OP_JUMP_ALU   = 8'h05,  // pc <= alu(rs1, rs2/imm)
    OP_INC_QCLK   = 8'h06,  // qclk <= qclk + alu(rs1, rs2/imm)
    OP_IDLE       = 8'h07,  // wait until qclk >= imm
    OP_REG_FPROC  = 8'h08,  // rd <= fproc(func_id)
    OP_JUMP_FPROC = 8'h09,  // if alu(fproc(func_id), rs2/imm) != 0 : pc <= addr
    OP_SYNC       = 8'h0A,  // wait for every core in imm mask, then qclk <= 0
    OP_DONE       = 8'h0B   // stop
  } opcode_e;

  typedef enum logic [2:0] {
    ALU_ADD = 3'd0, ALU_SUB = 3'd1, ALU_EQ = 3'd2,
    ALU_NE  = 3'd3, ALU_LT  = 3'd4, ALU_GE = 3'd5
  } alu_op_e;

  // 128-bit instruction. body holds {cmd, time} for OP_PULSE, otherwise
  // body[31:0] = imm, body[47:32] = jump address, body[55:48] = func_id.
  typedef struct packed {
    opcode_e      op;
    logic [3:0]   rd;
    logic [3:0]   rs1;
    logic [3:0]   rs2;
    logic         imm_sel;  // 1: second operand is imm
    alu_op_e      alu_op;
    logic [103:0] body;
  } instr_t;

  // Local bus: one-cycle write/read strobes, word address; slaves answer a
  // read with rvalid some cycles later.
  typedef struct packed {
    logic              wr;
    logic              rd;
    logic [LB_AW-1:0]  addr;
    logic [31:0]       wdata;
  } lb_req_t;

  typedef struct packed {
    logic        rvalid;
    logic [31:0] rdata;
  } lb_rsp_t;

  // AXI4-Lite, master-to-slave and slave-to-master halves.
  typedef struct packed {
    logic        awvalid; logic [31:0] awaddr;
    logic        wvalid;  logic [31:0] wdata; logic [3:0] wstrb;
    logic        bready;
    logic        arvalid; logic [31:0] araddr;
    logic        rready;
  } axil_req_t;

  typedef struct packed {
    logic        awready;
    logic        wready;
    logic        bvalid;  logic [1:0] bresp;
    logic        arready;
    logic        rvalid;  logic [31:0] rdata; logic [1:0] rresp;
  } axil_rsp_t;

  // cos(2*pi*i/2^LUT_BITS) in Q1.15, rounded, packed 16 bits per entry.
  function automatic logic [(2**LUT_BITS)*16-1:0] make_cos_lut();
    logic [(2**LUT_BITS)*16-1:0] r;
    real x;
    for (int i = 0; i < 2**LUT_BITS; i++) begin
      x = $cos(6.283185307179586 * i / (2.0**LUT_BITS)) * 32767.0;
      r[i*16 +: 16] = 16'($rtoi(x >= 0.0 ? x + 0.5 : x - 0.5));
    end
    return r;
  endfunction

  localparam logic [(2**LUT_BITS)*16-1:0] COS_LUT = make_cos_lut();

  function automatic sample_t cos_lut(input logic [LUT_BITS-1:0] idx);
    return sample_t'(COS_LUT[idx*16 +: 16]);
  endfunction

  // Saturate a wide signed value to a 16-bit sample.
  function automatic sample_t sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return sample_t'(v);
  endfunction

endpackage
