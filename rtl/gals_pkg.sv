`timescale 1ns/1ps
// gals_pkg: types and constants shared by the processing-element (PE) tile of
// the GALS mesh chip multiprocessor.
//
// The data word width, memory sizes, instruction format, link directions and
// the configuration register map all live here. None of these numbers is
// printed in the source description of the design: the 16-bit word, the
// 64-word instruction memory, the 128-word data memory and the 32-word
// inter-processor FIFOs are this implementation's choices, picked to match the
// class of small DSP-oriented mesh processors the design belongs to. The
// instruction set is likewise this design's own: the description names only an
// "ALU/MAC" datapath fed by an instruction memory, a data memory and two input
// FIFOs.
package gals_pkg;

  localparam int DATA_W   = 16;   // datapath word
  localparam int IMEM_AW  = 6;    // 64-entry instruction memory
  localparam int DMEM_AW  = 7;    // 128-word data memory
  localparam int FIFO_DEPTH = 32; // words per inter-processor FIFO
  localparam int FREQ_W   = 8;    // oscillator frequency code
  localparam int TPUT_W   = 16;   // throughput (words per window)
  localparam int GAIN_W   = 8;    // unsigned PID gain, 4 fractional bits
  localparam int GAIN_FRAC = 4;

  typedef logic [DATA_W-1:0] word_t;

  // ALU/MAC operations. MAC computes acc + a*b. JMP and the branches load pc
  // from the immediate; the branches test the accumulator (zero, non-zero,
  // negative).
  typedef enum logic [3:0] {
    OP_NOP = 4'd0, OP_MOV = 4'd1, OP_ADD = 4'd2, OP_SUB = 4'd3,
    OP_MUL = 4'd4, OP_MAC = 4'd5, OP_AND = 4'd6, OP_OR  = 4'd7,
    OP_XOR = 4'd8, OP_SHR = 4'd9, OP_JMP = 4'd10,
    OP_BZ  = 4'd11, OP_BNZ = 4'd12, OP_BNEG = 4'd13   // test the accumulator
  } opcode_e;

  // Operand sources. DMEM operands share the instruction's one address field.
  typedef enum logic [2:0] {
    SRC_FIFO0 = 3'd0, SRC_FIFO1 = 3'd1, SRC_ACC = 3'd2,
    SRC_DMEM  = 3'd3, SRC_IMM   = 3'd4, SRC_ZERO = 3'd5
  } src_e;

  typedef enum logic [1:0] {
    DST_NONE = 2'd0, DST_OUT = 2'd1, DST_ACC = 2'd2, DST_DMEM = 2'd3
  } dst_e;

  // 27-bit instruction word.
  typedef struct packed {
    opcode_e            op;
    dst_e               dst;
    src_e               srca;
    src_e               srcb;
    logic [DMEM_AW-1:0] addr;   // data-memory address for DMEM operands
    logic [7:0]         imm;    // sign-extended immediate, or jump target
  } instr_t;

  localparam int INSTR_W = $bits(instr_t);

  // Mesh link directions. DIR_EXT is an off-mesh port (only used at edges).
  typedef enum logic [2:0] {
    DIR_N = 3'd0, DIR_E = 3'd1, DIR_S = 3'd2, DIR_W = 3'd3, DIR_NONE = 3'd4
  } dir_e;

  // Configuration bus: per-PE address space.
  // addr[8] = 0 : instruction memory word addr[IMEM_AW-1:0]
  // addr[8] = 1 : register addr[3:0] (see cfg_reg_e)
  localparam int CFG_AW = 9;
  localparam int CFG_DW = 32;
  typedef enum logic [3:0] {
    REG_IN_SEL0 = 4'd0, REG_IN_SEL1 = 4'd1, REG_OUT_DIR = 4'd2,
    REG_SETPOINT = 4'd3, REG_FREQ_INIT = 4'd4, REG_DFS_EN = 4'd5,
    REG_KP = 4'd6, REG_KI = 4'd7, REG_KD = 4'd8
  } cfg_reg_e;

  // Build an instruction (used by testbenches and by program loaders).
  function automatic instr_t mk_instr(opcode_e op, dst_e dst, src_e a, src_e b,
                                      int addr, int imm);
    instr_t i;
    i.op = op; i.dst = dst; i.srca = a; i.srcb = b;
    i.addr = DMEM_AW'(addr); i.imm = 8'(imm);
    return i;
  endfunction

endpackage
