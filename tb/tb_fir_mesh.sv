`timescale 1ns/1ps
// tb_fir_mesh: FIR filter workload on the full 6 x 6 chip at its default
// parameters. A 72-tap FIR is split over the 36 tiles along a serpentine
// path, two taps per tile. The link between consecutive tiles carries
// interleaved pairs (delayed sample, partial sum). Tile k receives sample
// x[n-2k] and partial sum p, and emits x[n-2k-2] and
// p + c[2k]*x[n-2k] + c[2k+1]*x[n-2k-1]:
//   0: MOV DMEM[1] <- 0          1: MOV DMEM[2] <- 0        (clear history)
//   2: MOV DMEM[0] <- FIFO       3: MUL ACC <- DMEM[0] * c0
//   4: MAC ACC <- DMEM[1] * c1 + ACC
//   5: ADD ACC <- ACC + FIFO     6: MOV OUT <- DMEM[2]      7: MOV OUT <- ACC
//   8: MOV ACC <- DMEM[1]        9: MOV DMEM[2] <- ACC      (shift the
//  10: MOV ACC <- DMEM[0]       11: MOV DMEM[1] <- ACC       history through
//  12: JMP 2                                                 the accumulator)
// The source sends (x[n], 0) pairs; the sink checks every filter output
// against y[n] = sum c[j]*x[n-j] in 16-bit wrap-around arithmetic, computed
// here. The tiles run at different fixed clock codes, then with throughput
// control on. Stalls and frequency scaling are counted and must occur.
module tb_fir_mesh;
  import gals_pkg::*;
  localparam int ROWS = 6, COLS = 6, N = ROWS * COLS, TAPS = 2 * N;
  localparam int NSAMP = 1500;

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
  always #3 ext_in_clk = ~ext_in_clk;

  gals_cmp_top dut (.*);

  task automatic check(bit ok, string m);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", m); end
  endtask
  task automatic cfg(int pe, int a, int d);
    @(negedge ref_clk); cfg_we = 1; cfg_pe = 8'(pe); cfg_addr = CFG_AW'(a); cfg_wdata = CFG_DW'(d);
    @(negedge ref_clk); cfg_we = 0;
  endtask
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

  int coef [TAPS];
  word_t xs [NSAMP];
  function automatic word_t y_ref(int n);
    int acc = 0;
    for (int j = 0; j < TAPS; j++) if (n - j >= 0) acc += coef[j] * int'(xs[n - j]);
    return word_t'(acc);
  endfunction

  // source: words x0, 0, x1, 0, ...
  int n_word = 0, n_out = 0, n_y = 0;
  bit feed = 0, taken = 0;
  always @(negedge ext_in_clk) if (ext_in_valid && !ext_in_full) begin n_word++; taken = 1; end
  always @(posedge ext_in_clk) begin
    if (!ext_in_valid || taken) begin
      ext_in_valid <= feed && (n_word < 2 * NSAMP);
      ext_in_data  <= (n_word % 2 == 0 && n_word / 2 < NSAMP) ? xs[n_word / 2] : '0;
    end
    taken = 0;
  end
  always @(negedge ext_out_clk) if (ext_out_valid) begin
    if (n_out % 2 == 1) begin
      check(ext_out_data == y_ref(n_y), $sformatf("y[%0d] = %h expected %h", n_y, ext_out_data, y_ref(n_y)));
      n_y++;
    end
    n_out++;
  end

  initial begin
    #40000000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int es, fs, up, dn;
    for (int j = 0; j < TAPS; j++) coef[j] = $urandom_range(0, 254) - 127;
    for (int i = 0; i < NSAMP; i++) xs[i] = word_t'($urandom);
    repeat (3) @(negedge ref_clk);
    arst_n = 1;
    repeat (5) @(negedge ref_clk);
    for (int k = 0; k < N; k++) begin
      automatic int t = tile_of(k);
      cfg(t, 0,  mk_instr(OP_MOV, DST_DMEM, SRC_ZERO,  SRC_ZERO, 1, 0));
      cfg(t, 1,  mk_instr(OP_MOV, DST_DMEM, SRC_ZERO,  SRC_ZERO, 2, 0));
      cfg(t, 2,  mk_instr(OP_MOV, DST_DMEM, SRC_FIFO0, SRC_ZERO, 0, 0));
      cfg(t, 3,  mk_instr(OP_MUL, DST_ACC,  SRC_DMEM,  SRC_IMM,  0, coef[2*k]));
      cfg(t, 4,  mk_instr(OP_MAC, DST_ACC,  SRC_DMEM,  SRC_IMM,  1, coef[2*k+1]));
      cfg(t, 5,  mk_instr(OP_ADD, DST_ACC,  SRC_ACC,   SRC_FIFO0, 0, 0));
      cfg(t, 6,  mk_instr(OP_MOV, DST_OUT,  SRC_DMEM,  SRC_ZERO, 2, 0));
      cfg(t, 7,  mk_instr(OP_MOV, DST_OUT,  SRC_ACC,   SRC_ZERO, 0, 0));
      cfg(t, 8,  mk_instr(OP_MOV, DST_ACC,  SRC_DMEM,  SRC_ZERO, 1, 0));
      cfg(t, 9,  mk_instr(OP_MOV, DST_DMEM, SRC_ACC,   SRC_ZERO, 2, 0));
      cfg(t, 10, mk_instr(OP_MOV, DST_ACC,  SRC_DMEM,  SRC_ZERO, 0, 0));
      cfg(t, 11, mk_instr(OP_MOV, DST_DMEM, SRC_ACC,   SRC_ZERO, 1, 0));
      cfg(t, 12, mk_instr(OP_JMP, DST_NONE, SRC_ZERO,  SRC_ZERO, 0, 2));
      cfg(t, 9'h100, int'(in_dir(k)));
      cfg(t, 9'h102, int'(out_dir_of(k)));
      cfg(t, 9'h104, 30 + ((k + 3) * 53) % 200);
      cfg(t, 9'h103, 45);   // output words per window (2 per sample)
    end
    feed = 1; run = 1;
    repeat (256 * 10) @(negedge ref_clk);
    for (int k = 0; k < N; k++) cfg(tile_of(k), 9'h105, 1);
    while (n_y < NSAMP && $time < 38000000) @(negedge ref_clk);
    check(n_y == NSAMP, $sformatf("%0d of %0d filter outputs", n_y, NSAMP));
    es = 0; fs = 0; up = 0; dn = 0;
    for (int i = 0; i < N; i++) begin
      es += int'(n_empty_stall[i]); fs += int'(n_full_stall[i]);
      up += int'(n_scale_up[i]);    dn += int'(n_scale_down[i]);
    end
    check(es > 0 && fs > 0, "both stall kinds");
    check(up > 0 && dn > 0, "frequency scaled both ways");
    $display("samples=%0d empty_stalls=%0d full_stalls=%0d scale_up=%0d scale_down=%0d time=%0t",
             n_y, es, fs, up, dn, $time);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
