`timescale 1ns/1ps
// pe_core: the single-issue processor of a processing element, built around
// the ALU/MAC unit and the data memory.
//
// Each cycle it executes the instruction at pc: operands come from the two
// input FIFOs, the accumulator, data memory or the immediate; the result goes
// to the output link, the accumulator or data memory. JMP loads pc from the
// immediate; BZ, BNZ and BNEG do so when the accumulator is zero, non-zero or
// negative, which is enough for counted loops and data-dependent code. An instruction that reads an empty input FIFO waits ("empty
// stall"); one that writes the output while the downstream FIFO is full waits
// ("full stall"). These two stalls are the ones the design's analysis of
// communication loops is built on. A stalled instruction has no side effect
// and retries on the next cycle. A FIFO named by both operands is popped once.
//
// Interface: FIFO inputs are first-word-fall-through (data valid while empty
// is low, pop on the clock edge). out_valid/out_data are registered: an
// instruction that writes the output commits on the rising edge where
// out_full is low, and its word is on out_data with out_valid high for the
// following cycle. The downstream FIFO, clocked by this core's clock
// (source-synchronous link), takes it on the falling edge in that cycle; a
// low out_full at the commit edge guarantees it has room. stall_empty, stall_full and retire are
// one-cycle event pulses. While run is low pc is held at 0 and nothing runs.
// Timing: one instruction per cycle when not stalled; a data-memory write is
// readable by the next instruction; an output word appears one cycle after its
// instruction commits.
// The instruction set, single-cycle timing and stall-by-retry are this
// design's own choices.
module pe_core
  import gals_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               run,
  // instruction fetch
  output logic [IMEM_AW-1:0] pc,
  input  instr_t             instr,
  // input FIFOs
  input  word_t              fifo0_rdata,
  input  logic               fifo0_empty,
  output logic               fifo0_pop,
  input  word_t              fifo1_rdata,
  input  logic               fifo1_empty,
  output logic               fifo1_pop,
  // output link
  output word_t              out_data,
  output logic               out_valid,
  input  logic               out_full,
  // event pulses
  output logic               stall_empty,
  output logic               stall_full,
  output logic               retire
);
  word_t acc;
  word_t a, b, y, dmem_rdata;
  logic  use_f0, use_f1, writes_out, stall;

  function automatic word_t pick(src_e s, word_t f0, word_t f1, word_t ac,
                                 word_t dm, logic [7:0] imm);
    case (s)
      SRC_FIFO0: return f0;
      SRC_FIFO1: return f1;
      SRC_ACC:   return ac;
      SRC_DMEM:  return dm;
      SRC_IMM:   return word_t'(signed'(imm));
      default:   return '0;
    endcase
  endfunction

  // an instruction only reads its operands if it is an ALU operation
  logic is_alu, is_ctl, taken;
  assign is_ctl     = (instr.op == OP_JMP) || (instr.op == OP_BZ) ||
                      (instr.op == OP_BNZ) || (instr.op == OP_BNEG);
  assign is_alu     = (instr.op != OP_NOP) && !is_ctl;
  always_comb begin
    unique case (instr.op)
      OP_JMP:  taken = 1'b1;
      OP_BZ:   taken = (acc == '0);
      OP_BNZ:  taken = (acc != '0);
      OP_BNEG: taken = acc[DATA_W-1];
      default: taken = 1'b0;
    endcase
  end
  logic uses_b;
  assign uses_b     = (instr.op != OP_MOV);
  assign use_f0     = is_alu && (instr.srca == SRC_FIFO0 || (uses_b && instr.srcb == SRC_FIFO0));
  assign use_f1     = is_alu && (instr.srca == SRC_FIFO1 || (uses_b && instr.srcb == SRC_FIFO1));
  assign writes_out = is_alu && (instr.dst == DST_OUT);

  assign stall_empty = run && ((use_f0 && fifo0_empty) || (use_f1 && fifo1_empty));
  assign stall_full  = run && !stall_empty && writes_out && out_full;
  assign stall       = stall_empty || stall_full;

  assign a = pick(instr.srca, fifo0_rdata, fifo1_rdata, acc, dmem_rdata, instr.imm);
  assign b = pick(instr.srcb, fifo0_rdata, fifo1_rdata, acc, dmem_rdata, instr.imm);

  alu_mac u_alu (.op(instr.op), .a(a), .b(b), .acc(acc), .y(y));

  logic go;
  assign go        = run && !stall;
  assign retire    = go;
  assign fifo0_pop = go && use_f0;
  assign fifo1_pop = go && use_f1;
  // registered link output: launched on the edge that commits the
  // instruction, captured by the downstream FIFO half a cycle later
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= go && writes_out;
      if (go && writes_out) out_data <= y;
    end
  end

  pe_dmem u_dmem (
    .clk   (clk),
    .we    (go && is_alu && instr.dst == DST_DMEM),
    .waddr (instr.addr),
    .wdata (y),
    .raddr (instr.addr),
    .rdata (dmem_rdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc  <= '0;
      acc <= '0;
    end else if (!run) begin
      pc  <= '0;
    end else if (go) begin
      if (taken) pc <= instr.imm[IMEM_AW-1:0];
      else                    pc <= pc + 1'b1;
      if (is_alu && instr.dst == DST_ACC) acc <= y;
    end
  end
endmodule
