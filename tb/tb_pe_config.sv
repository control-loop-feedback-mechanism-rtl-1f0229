`timescale 1ns/1ps
// tb_pe_config: checks reset values, writes every register over the
// configuration bus and reads it back from the outputs, checks that
// out-of-range directions become DIR_NONE, that writes with cfg_we low are
// ignored and that instruction-memory writes are decoded to the IMEM port.
module tb_pe_config;
  import gals_pkg::*;
  logic clk = 0, rst_n = 0, cfg_we = 0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [CFG_DW-1:0] cfg_wdata = '0;
  logic imem_we; logic [IMEM_AW-1:0] imem_waddr; instr_t imem_wdata;
  dir_e in_sel0, in_sel1, out_dir;
  logic [TPUT_W-1:0] setpoint; logic [FREQ_W-1:0] freq_init; logic dfs_en;
  logic [GAIN_W-1:0] kp, ki, kd;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  pe_config dut (.*);
  task automatic check(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask
  task automatic wr(int a, int d, bit en = 1);
    @(negedge clk); cfg_we = en; cfg_addr = CFG_AW'(a); cfg_wdata = CFG_DW'(d);
    @(negedge clk); cfg_we = 0;
  endtask
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    check(in_sel0 == DIR_NONE && in_sel1 == DIR_NONE && out_dir == DIR_NONE, "reset dirs");
    check(freq_init == 8'd100 && kp == 8'd1 && ki == 8'd1 && kd == 8'd0 && !dfs_en && setpoint == 0, "reset regs");
    wr(9'h100, 2); wr(9'h101, 3); wr(9'h102, 1);
    check(in_sel0 == DIR_S && in_sel1 == DIR_W && out_dir == DIR_E, "direction writes");
    wr(9'h101, 7);
    check(in_sel1 == DIR_NONE, "invalid direction maps to NONE");
    wr(9'h103, 16'h1234); wr(9'h104, 77); wr(9'h105, 1); wr(9'h106, 33); wr(9'h107, 44); wr(9'h108, 55);
    check(setpoint == 16'h1234 && freq_init == 77 && dfs_en && kp == 33 && ki == 44 && kd == 55, "register writes");
    wr(9'h103, 16'h4321, 0);
    check(setpoint == 16'h1234, "write without cfg_we ignored");
    // IMEM decode (combinational)
    @(negedge clk); cfg_we = 1; cfg_addr = 9'h02a; cfg_wdata = 32'h05abcdef; #1;
    check(imem_we && imem_waddr == 6'h2a && imem_wdata == instr_t'(27'h5abcdef), "imem decode");
    cfg_addr = 9'h105; #1;
    check(!imem_we, "register write does not hit imem");
    @(negedge clk); cfg_we = 0;
    for (int i = 0; i < 100; i++) begin
      automatic int v = $urandom;
      wr(9'h103, v);
      check(setpoint == 16'(v), "random set point");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
