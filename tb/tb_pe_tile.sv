`timescale 1ns/1ps
// tb_pe_tile: one processing element with its oscillator, FIFOs, core and
// control loop, driven by two modelled neighbours and a modelled sink.
// The west neighbour (own 130 MHz clock) feeds FIFO0 and the north neighbour
// (own 90 MHz clock) feeds FIFO1; the tile runs
//   0: ADD OUT <- FIFO0 + FIFO1     1: JMP 0
// and sends its results east to a sink that is sometimes full. Checks:
//  * configuration by the bus, then every output word equals the sum of the
//    matching input words, in order, with none lost;
//  * the FIFO full flags reach the neighbours (back-pressure) and the core
//    sees both empty and full stalls;
//  * with frequency scaling disabled the oscillator code equals the base code;
//  * with scaling enabled and ample input, the measured throughput settles
//    within 10 % of a set point below the starting rate (frequency scaled
//    down) and then of one above it (frequency scaled up).
module tb_pe_tile;
  import gals_pkg::*;
  logic ref_clk = 0, arst_n = 0, run = 0, cfg_we = 0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [CFG_DW-1:0] cfg_wdata = '0;
  word_t in_data [4] = '{default: '0};
  logic in_valid [4] = '{default: 1'b0};
  logic in_clk [4], in_full [4], out_valid [4], out_full [4], out_clk;
  word_t out_data;
  logic [FREQ_W-1:0] freq_code;
  logic [31:0] n_empty_stall, n_full_stall, n_retired, n_scale_up, n_scale_down;
  logic [TPUT_W-1:0] obtained;
  int checks = 0, failures = 0;

  always #5 ref_clk = ~ref_clk;
  logic wclk = 0, nclk = 0;
  always #3.846 wclk = ~wclk;
  always #5.555 nclk = ~nclk;

  pe_tile dut (.*);

  task automatic check(bit ok, string m);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", m); end
  endtask

  task automatic cfg(int a, int d);
    @(negedge ref_clk); cfg_we = 1; cfg_addr = CFG_AW'(a); cfg_wdata = CFG_DW'(d);
    @(negedge ref_clk); cfg_we = 0;
  endtask

  // neighbours
  word_t qa [$], qb [$], exp_q [$];
  int sent_w = 0, sent_n = 0, got = 0, wfull = 0, nfull = 0;
  bit feed = 1, sink_block = 0;
  word_t wv, nv;
  assign in_clk[DIR_W] = wclk;
  assign in_clk[DIR_N] = nclk;
  assign in_clk[DIR_E] = 1'b0;
  assign in_clk[DIR_S] = 1'b0;
  assign out_full[DIR_N] = 1'b1; assign out_full[DIR_S] = 1'b1; assign out_full[DIR_W] = 1'b1;

  // a neighbour's word is taken by the FIFO on the falling edge of its clock
  bit acc_w = 0, acc_n = 0;
  always @(negedge wclk) if (in_valid[DIR_W]) begin
    if (!in_full[DIR_W]) begin qa.push_back(in_data[DIR_W]); sent_w++; acc_w = 1; end
    else wfull++;
  end
  always @(negedge nclk) if (in_valid[DIR_N]) begin
    if (!in_full[DIR_N]) begin qb.push_back(in_data[DIR_N]); sent_n++; acc_n = 1; end
    else nfull++;
  end
  always @(posedge wclk) begin
    if (!in_valid[DIR_W] || acc_w) begin
      in_valid[DIR_W] <= feed && ($urandom_range(0, 3) != 0);
      in_data[DIR_W]  <= word_t'($urandom);
    end
    acc_w = 0;
  end
  always @(posedge nclk) begin
    if (!in_valid[DIR_N] || acc_n) begin
      in_valid[DIR_N] <= feed;
      in_data[DIR_N]  <= word_t'($urandom);
    end
    acc_n = 0;
  end
  // sink on the tile's link clock, sampling on the falling edge
  always @(negedge out_clk) begin
    if (out_valid[DIR_E]) begin
      check(qa.size() > 0 && qb.size() > 0, "output without inputs");
      if (qa.size() > 0 && qb.size() > 0)
        begin word_t xa, xb; xa = qa.pop_front(); xb = qb.pop_front(); check(out_data == word_t'(xa + xb), $sformatf("sum mismatch %h + %h -> %h (q %0d %0d) t=%0t", xa, xb, out_data, qa.size(), qb.size(), $time)); end
      got++;
    end
    for (int d = 0; d < 4; d++) if (d != int'(DIR_E)) check(!out_valid[d], "valid on wrong direction");
    out_full[DIR_E] <= sink_block && ($urandom_range(0, 1) == 0);
  end

  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int f0, settle_ok;
    repeat (3) @(negedge ref_clk);
    arst_n = 1;
    repeat (5) @(negedge ref_clk);
    cfg(9'h000, mk_instr(OP_ADD, DST_OUT, SRC_FIFO0, SRC_FIFO1, 0, 0));
    cfg(9'h001, mk_instr(OP_JMP, DST_NONE, SRC_ZERO, SRC_ZERO, 0, 0));
    cfg(9'h100, int'(DIR_W)); cfg(9'h101, int'(DIR_N)); cfg(9'h102, int'(DIR_E));
    cfg(9'h104, 60);
    repeat (3) @(negedge ref_clk);
    check(freq_code == 60, "base code applied when scaling is off");
    // phase 1: data path under back-pressure: slow tile (60 => 300 MHz but
    // inputs at 130/90 MHz), sink often full
    sink_block = 1; run = 1;
    repeat (3000) @(negedge ref_clk);
    sink_block = 0;
    cfg(9'h104, 8);   // slow the tile to 40 MHz so the neighbours see full
    repeat (3000) @(negedge ref_clk);
    check(wfull > 0 && nfull > 0, $sformatf("back-pressure not seen (%0d, %0d)", wfull, nfull));
    check(n_empty_stall > 0 && n_full_stall > 0, "stall kinds");
    // phase 2: control loop. Ample input: 45 MHz-equivalent rate limit is
    // the inputs (~90 MHz north); set points below that.
    cfg(9'h104, 100);
    cfg(9'h106, 1); cfg(9'h107, 1); cfg(9'h108, 0);
    cfg(9'h103, 100);            // words per 256-cycle window (2.56 us)
    cfg(9'h105, 1);
    repeat (256 * 40) @(negedge ref_clk);
    settle_ok = (obtained > 90 && obtained < 110);
    check(settle_ok, $sformatf("set point 100: obtained %0d code %0d", obtained, freq_code));
    check(n_scale_down > 0, "scaled down");
    f0 = freq_code;
    cfg(9'h103, 160);
    repeat (256 * 40) @(negedge ref_clk);
    check(obtained > 144 && obtained < 176, $sformatf("set point 160: obtained %0d code %0d", obtained, freq_code));
    check(freq_code > f0 && n_scale_up > 0, "scaled up");
    // drain
    feed = 0;
    cfg(9'h105, 0);
    repeat (2000) @(negedge ref_clk);
    check(got > 1000, "enough outputs");
    check(qa.size() == 0 || qb.size() == 0, "inputs left unconsumed");
    $display("sent_w=%0d sent_n=%0d got=%0d empty_stalls=%0d full_stalls=%0d up=%0d down=%0d code=%0d",
             sent_w, sent_n, got, n_empty_stall, n_full_stall, n_scale_up, n_scale_down, freq_code);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
