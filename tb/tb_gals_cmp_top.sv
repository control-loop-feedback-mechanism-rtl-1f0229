`timescale 1ns/1ps
// tb_gals_cmp_top: end-to-end test of the whole 6 x 6 GALS chip
// multiprocessor at its default parameters.
//
// A serpentine path is configured through all 36 tiles: row 0 left to right,
// row 1 right to left, and so on, entering at the west link of tile (0,0) and
// leaving at the west link of tile (5,0). Even-numbered tiles on the path
// take their input in FIFO0 and add their path index; odd-numbered ones use
// FIFO1 and XOR it in. The testbench applies the same 36 steps to every input
// word and checks the output stream word for word.
//
// Phase 1 (scaling off): each tile gets a different fixed oscillator code, so
// fast tiles wait on slow ones; the sink blocks at random. Phase 2 (scaling
// on): every tile is given the same throughput set point and its PID loop
// retunes its oscillator; at the end every tile's measured throughput must be
// within 15 % of the set point. Mechanisms counted, each of which must occur:
// empty stall, full stall, back-pressure on the external input, frequency
// scaled up, frequency scaled down. The sum of oscillator codes (a proxy for
// clock power) is printed for both phases.
module tb_gals_cmp_top;
  import gals_pkg::*;
  localparam int ROWS = 6, COLS = 6, N = ROWS * COLS;
  localparam int SETPOINT = 200;

  logic ref_clk = 0, arst_n = 0, run = 0, cfg_we = 0;
  logic [7:0] cfg_pe = '0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [CFG_DW-1:0] cfg_wdata = '0;
  logic ext_in_clk = 0, ext_in_valid = 0, ext_in_full;
  word_t ext_in_data = '0, ext_out_data;
  logic ext_out_clk, ext_out_valid, ext_out_full = 0;
  logic [FREQ_W-1:0] freq_code [N];
  logic [31:0] n_empty_stall [N], n_full_stall [N], n_retired [N], n_scale_up [N], n_scale_down [N];
  logic [TPUT_W-1:0] obtained [N];

  int checks = 0, failures = 0;
  always #5 ref_clk = ~ref_clk;
  always #2.5 ext_in_clk = ~ext_in_clk;   // 200 MHz source

  gals_cmp_top dut (.*);

  task automatic check(bit ok, string m);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", m); end
  endtask

  task automatic cfg(int pe, int a, int d);
    @(negedge ref_clk); cfg_we = 1; cfg_pe = 8'(pe); cfg_addr = CFG_AW'(a); cfg_wdata = CFG_DW'(d);
    @(negedge ref_clk); cfg_we = 0;
  endtask

  // path index k -> tile
  function automatic int tile_of(int k);
    int r, c;
    r = k / COLS;
    c = (r % 2 == 0) ? (k % COLS) : (COLS - 1 - k % COLS);
    return r * COLS + c;
  endfunction
  function automatic dir_e in_dir(int k);
    if (k == 0) return DIR_W;
    if (k % COLS == 0) return DIR_N;
    return ((k / COLS) % 2 == 0) ? DIR_W : DIR_E;
  endfunction
  function automatic dir_e out_dir_of(int k);
    if (k == N - 1) return DIR_W;
    if (k % COLS == COLS - 1) return DIR_S;
    return ((k / COLS) % 2 == 0) ? DIR_E : DIR_W;
  endfunction
  function automatic word_t expected(word_t x);
    word_t v = x;
    for (int k = 0; k < N; k++) v = (k % 2 == 0) ? word_t'(v + word_t'(k)) : (v ^ word_t'(k));
    return v;
  endfunction

  // source: holds a word until the FIFO takes it on the falling edge
  word_t sent_q [$];
  bit feed = 0, taken = 0, sink_block = 0;
  int n_sent = 0, n_got = 0, n_backpressure = 0;
  always @(negedge ext_in_clk) if (ext_in_valid) begin
    if (!ext_in_full) begin sent_q.push_back(ext_in_data); n_sent++; taken = 1; end
    else n_backpressure++;
  end
  always @(posedge ext_in_clk) begin
    if (!ext_in_valid || taken) begin
      ext_in_valid <= feed;
      ext_in_data  <= word_t'($urandom);
    end
    taken = 0;
  end
  // sink: samples on the falling edge of the link clock
  always @(negedge ext_out_clk) begin
    if (ext_out_valid) begin
      check(sent_q.size() > 0, "output without input");
      if (sent_q.size() > 0) begin
        automatic word_t x = sent_q.pop_front();
        check(ext_out_data == expected(x), $sformatf("word %0d: got %h expected %h", n_got, ext_out_data, expected(x)));
      end
      n_got++;
    end
    ext_out_full <= sink_block && ($urandom_range(0, 2) == 0);
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int code_sum();
    int s = 0;
    for (int i = 0; i < N; i++) s += int'(freq_code[i]);
    return s;
  endfunction

  initial begin
    int es, fs, up, dn, sum1, sum2, in_band;
    repeat (3) @(negedge ref_clk);
    arst_n = 1;
    repeat (5) @(negedge ref_clk);
    for (int k = 0; k < N; k++) begin
      automatic int t = tile_of(k);
      automatic int fk = (k % 2 == 0) ? 0 : 1;
      cfg(t, 9'h000, (fk == 0) ? mk_instr(OP_ADD, DST_OUT, SRC_FIFO0, SRC_IMM, 0, k)
                               : mk_instr(OP_XOR, DST_OUT, SRC_FIFO1, SRC_IMM, 0, k));
      cfg(t, 9'h001, mk_instr(OP_JMP, DST_NONE, SRC_ZERO, SRC_ZERO, 0, 0));
      cfg(t, 9'h100 + fk, int'(in_dir(k)));
      cfg(t, 9'h102, int'(out_dir_of(k)));
      cfg(t, 9'h104, 20 + (k * 37) % 180);
      cfg(t, 9'h103, SETPOINT);
    end
    repeat (4) @(negedge ref_clk);
    for (int k = 0; k < N; k++)
      check(int'(freq_code[tile_of(k)]) == 20 + (k * 37) % 180, "base code applied");
    // phase 1
    feed = 1; sink_block = 1; run = 1;
    repeat (256 * 12) @(negedge ref_clk);
    sum1 = code_sum();
    sink_block = 0;
    // phase 2
    for (int k = 0; k < N; k++) cfg(tile_of(k), 9'h105, 1);
    repeat (256 * 60) @(negedge ref_clk);
    sum2 = code_sum();
    in_band = 0;
    for (int i = 0; i < N; i++)
      if (obtained[i] > TPUT_W'(SETPOINT * 85 / 100) && obtained[i] < TPUT_W'(SETPOINT * 115 / 100)) in_band++;
    check(in_band == N, $sformatf("%0d of %0d tiles within 15%% of the set point", in_band, N));
    for (int r = 0; r < ROWS; r++) begin
      automatic string line = "";
      for (int c = 0; c < COLS; c++) line = {line, $sformatf(" %3d/%3d", freq_code[r*COLS+c], obtained[r*COLS+c])};
      $display("row %0d code/throughput:%s", r, line);
    end
    // drain
    feed = 0;
    repeat (256 * 4) @(negedge ref_clk);
    check(sent_q.size() == 0, $sformatf("%0d words still inside", sent_q.size()));
    check(n_got == n_sent && n_got > 1000, $sformatf("sent %0d received %0d", n_sent, n_got));
    es = 0; fs = 0; up = 0; dn = 0;
    for (int i = 0; i < N; i++) begin
      es += int'(n_empty_stall[i]); fs += int'(n_full_stall[i]);
      up += int'(n_scale_up[i]);    dn += int'(n_scale_down[i]);
    end
    check(es > 0, "mechanism: empty stall never happened");
    check(fs > 0, "mechanism: full stall never happened");
    check(n_backpressure > 0, "mechanism: external back-pressure never happened");
    check(up > 0, "mechanism: frequency never scaled up");
    check(dn > 0, "mechanism: frequency never scaled down");
    $display("words=%0d empty_stalls=%0d full_stalls=%0d ext_backpressure=%0d scale_up=%0d scale_down=%0d",
             n_got, es, fs, n_backpressure, up, dn);
    $display("oscillator code sum: fixed=%0d regulated=%0d", sum1, sum2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
