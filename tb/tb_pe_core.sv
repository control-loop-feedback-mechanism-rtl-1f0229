`timescale 1ns/1ps
// tb_pe_core: runs a small program on the core with modelled input FIFOs and
// a modelled output sink. The program (loaded into a local instruction array)
// is
//   0: MOV  DMEM[5] <- FIFO0          x
//   1: MUL  ACC     <- DMEM[5] * 3
//   2: MAC  ACC     <- FIFO1 * -2 + ACC
//   3: ADD  OUT     <- ACC + DMEM[5]  = 4x - 2y
//   4: XOR  OUT     <- FIFO0 ^ FIFO1
//   5: SHR  OUT     <- FIFO0 >>> 2
//   6: JMP  0
// Phase 3 runs a counted loop closed by BNZ and checks its cycle count, and a
// short program checks BNEG and BZ.
// Expected outputs are computed here from the input streams. Phase 1 keeps
// both FIFOs full and the sink open and checks one instruction per cycle with
// no stall. Phase 2 starves the inputs and blocks the output at random and
// checks the data stream, that every cycle is either a retire or a stall, and
// that both stall kinds occurred.
module tb_pe_core;
  import gals_pkg::*;
  logic clk = 0, rst_n = 0, run = 0;
  logic [IMEM_AW-1:0] pc;
  instr_t instr, prog [8];
  word_t fifo0_rdata, fifo1_rdata, out_data;
  logic fifo0_empty, fifo1_empty, fifo0_pop, fifo1_pop, out_valid, out_full = 0;
  logic stall_empty, stall_full, retire;
  int checks = 0, failures = 0;
  word_t q0 [$], q1 [$], expq [$];
  int n_ret = 0, n_se = 0, n_sf = 0, n_cyc = 0, n_out = 0;
  bit starve = 0, starve_start = 0;

  always #5 clk = ~clk;
  assign instr = prog[pc[2:0]];

  pe_core dut (.*);

  task automatic check(bit ok, string m);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", m); end
  endtask

  // reference outputs, built from the streams as they are generated
  word_t sx0, sy0, sx1, sy1, sx2;
  task automatic gen_iteration();
    sx0 = word_t'($urandom); sy0 = word_t'($urandom);
    sx1 = word_t'($urandom); sy1 = word_t'($urandom); sx2 = word_t'($urandom);
    q0.push_back(sx0); q0.push_back(sx1); q0.push_back(sx2);
    q1.push_back(sy0); q1.push_back(sy1);
    expq.push_back(word_t'(4*int'(sx0) - 2*int'(sy0)));
    expq.push_back(sx1 ^ sy1);
    expq.push_back(word_t'($signed(sx2) >>> 2));
  endtask

  // hidden part of the streams: FIFOs only show what has "arrived"
  int vis0 = 0, vis1 = 0;
  logic p0, p1;
  bit full_prev = 0;
  always @(posedge clk) begin
    p0 = fifo0_pop; p1 = fifo1_pop;
    if (out_valid) begin
      check(!full_prev, "output committed while full");
      check(expq.size() > 0 && out_data == expq[0], $sformatf("out %h exp %h", out_data, expq.size() ? expq[0] : '0));
      if (expq.size() > 0) void'(expq.pop_front());
      n_out++;
    end
    full_prev = out_full;
    if (run) begin
      n_cyc++;
      if (retire) n_ret++;
      if (stall_empty) n_se++;
      if (stall_full) n_sf++;
      check(int'(retire) + int'(stall_empty) + int'(stall_full) == 1, "cycle neither retire nor single stall");
      check(!(p0 && fifo0_empty) && !(p1 && fifo1_empty), "pop of empty FIFO");
    end
  end
  always @(negedge clk) begin
    if (p0) begin void'(q0.pop_front()); vis0--; end
    if (p1) begin void'(q1.pop_front()); vis1--; end
    p0 = 0; p1 = 0;
    if (starve_start) begin vis0 = 0; vis1 = 0; starve_start = 0; end
    if (starve) begin
      if (vis0 < q0.size() && $urandom_range(0, 2) == 0) vis0++;
      if (vis1 < q1.size() && $urandom_range(0, 2) == 0) vis1++;
      out_full = ($urandom_range(0, 3) == 0);
    end else begin
      vis0 = q0.size(); vis1 = q1.size(); out_full = 0;
    end
    fifo0_empty = (vis0 == 0); fifo1_empty = (vis1 == 0);
    fifo0_rdata = q0.size() ? q0[0] : '0;
    fifo1_rdata = q1.size() ? q1[0] : '0;
  end

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    prog[0] = mk_instr(OP_MOV, DST_DMEM, SRC_FIFO0, SRC_ZERO, 5, 0);
    prog[1] = mk_instr(OP_MUL, DST_ACC,  SRC_DMEM,  SRC_IMM,  5, 3);
    prog[2] = mk_instr(OP_MAC, DST_ACC,  SRC_FIFO1, SRC_IMM,  0, -2);
    prog[3] = mk_instr(OP_ADD, DST_OUT,  SRC_ACC,   SRC_DMEM, 5, 0);
    prog[4] = mk_instr(OP_XOR, DST_OUT,  SRC_FIFO0, SRC_FIFO1, 0, 0);
    prog[5] = mk_instr(OP_SHR, DST_OUT,  SRC_FIFO0, SRC_IMM,  0, 2);
    prog[6] = mk_instr(OP_JMP, DST_NONE, SRC_ZERO,  SRC_ZERO, 0, 0);
    prog[7] = mk_instr(OP_NOP, DST_NONE, SRC_ZERO,  SRC_ZERO, 0, 0);
    for (int i = 0; i < 200; i++) gen_iteration();
    fifo0_empty = 1; fifo1_empty = 1; fifo0_rdata = '0; fifo1_rdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // phase 1: 70 cycles = 10 full passes of the 7-instruction loop
    run = 1;
    repeat (70) @(negedge clk);
    run = 0;
    check(n_ret == 70 && n_se == 0 && n_sf == 0, $sformatf("phase 1: %0d retired of 70, stalls %0d/%0d", n_ret, n_se, n_sf));
    @(negedge clk);
    check(n_out == 30, $sformatf("phase 1: %0d outputs, expected 30", n_out));
    check(pc == 0, "pc not reset by run low");
    // phase 2
    starve = 1; starve_start = 1; run = 1;
    while (expq.size() > 0 && n_cyc < 20000) @(negedge clk);
    run = 0;
    @(negedge clk);
    check(expq.size() == 0, $sformatf("%0d outputs missing", expq.size()));
    check(n_se > 0 && n_sf > 0, $sformatf("stalls empty=%0d full=%0d", n_se, n_sf));
    check(n_ret + n_se + n_sf == n_cyc, "cycle accounting");
    // phase 3: counted loop with a conditional branch. Sums 5 words of FIFO0
    // and outputs the sum; 2 + 5*4 + 2 = 24 cycles per output when nothing
    // stalls.
    starve = 0;
    prog[0] = mk_instr(OP_MOV,  DST_DMEM, SRC_IMM,   SRC_ZERO,  10, 5);
    prog[1] = mk_instr(OP_MOV,  DST_DMEM, SRC_ZERO,  SRC_ZERO,  11, 0);
    prog[2] = mk_instr(OP_ADD,  DST_DMEM, SRC_DMEM,  SRC_FIFO0, 11, 0);
    prog[3] = mk_instr(OP_ADD,  DST_ACC,  SRC_DMEM,  SRC_IMM,   10, -1);
    prog[4] = mk_instr(OP_MOV,  DST_DMEM, SRC_ACC,   SRC_ZERO,  10, 0);
    prog[5] = mk_instr(OP_BNZ,  DST_NONE, SRC_ZERO,  SRC_ZERO,  0, 2);
    prog[6] = mk_instr(OP_MOV,  DST_OUT,  SRC_DMEM,  SRC_ZERO,  11, 0);
    prog[7] = mk_instr(OP_JMP,  DST_NONE, SRC_ZERO,  SRC_ZERO,  0, 0);
    q0.delete(); q1.delete();
    for (int m = 0; m < 20; m++) begin
      automatic word_t sum = '0;
      for (int j = 0; j < 5; j++) begin
        automatic word_t w = word_t'($urandom);
        q0.push_back(w); sum += w;
      end
      expq.push_back(sum);
    end
    @(negedge clk);
    n_out = 0; n_se = 0; n_sf = 0; n_ret = 0; n_cyc = 0;
    run = 1;
    repeat (24 * 20) @(negedge clk);
    run = 0;
    @(negedge clk);
    check(n_out == 20 && expq.size() == 0, $sformatf("loop: %0d outputs in 480 cycles, expected 20", n_out));
    check(n_se == 0 && n_sf == 0 && n_ret == 480, "loop: no stalls, one instruction per cycle");
    // BZ and BNEG: acc = -3 -> BNEG taken; acc = 0 -> BZ taken
    prog[0] = mk_instr(OP_MOV,  DST_ACC,  SRC_IMM,   SRC_ZERO,  0, -3);
    prog[1] = mk_instr(OP_BNEG, DST_NONE, SRC_ZERO,  SRC_ZERO,  0, 4);
    prog[2] = mk_instr(OP_MOV,  DST_OUT,  SRC_IMM,   SRC_ZERO,  0, 99);
    prog[3] = mk_instr(OP_JMP,  DST_NONE, SRC_ZERO,  SRC_ZERO,  0, 3);
    prog[4] = mk_instr(OP_ADD,  DST_ACC,  SRC_ACC,   SRC_IMM,   0, 3);
    prog[5] = mk_instr(OP_BZ,   DST_NONE, SRC_ZERO,  SRC_ZERO,  0, 7);
    prog[6] = mk_instr(OP_MOV,  DST_OUT,  SRC_IMM,   SRC_ZERO,  0, 98);
    prog[7] = mk_instr(OP_MOV,  DST_OUT,  SRC_IMM,   SRC_ZERO,  0, 42);
    expq.push_back(16'd42);
    n_out = 0;
    run = 1;
    repeat (7) @(negedge clk);   // pc 0,1,4,5,7 then wraps to 0,1: one output, 42
    run = 0;
    @(negedge clk);
    check(n_out == 1 && expq.size() == 0, $sformatf("branches: %0d outputs, %0d expected left", n_out, expq.size()));
    $display("cycles=%0d retired=%0d empty_stalls=%0d full_stalls=%0d outputs=%0d", n_cyc, n_ret, n_se, n_sf, n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
