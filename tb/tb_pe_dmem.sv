`timescale 1ns/1ps
// tb_pe_dmem: random writes and reads of the data memory against a shadow
// array; also checks that a word written on one clock edge is readable right
// after it and that a write with we low changes nothing.
module tb_pe_dmem;
  import gals_pkg::*;
  logic clk = 0, we = 0;
  logic [DMEM_AW-1:0] waddr = '0, raddr = '0;
  word_t wdata = '0, rdata, shadow [2**DMEM_AW];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  pe_dmem dut (.*);
  task automatic check(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 2**DMEM_AW; i++) begin
      @(negedge clk); we = 1; waddr = DMEM_AW'(i); wdata = word_t'($urandom); shadow[i] = wdata;
    end
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      raddr = DMEM_AW'($urandom); #1;
      check(rdata == shadow[raddr], $sformatf("read addr %0d", raddr));
      we = ($urandom_range(0, 1) == 1); waddr = DMEM_AW'($urandom); wdata = word_t'($urandom);
      if (we) shadow[waddr] = wdata;
      @(posedge clk); #1; we = 0;
      raddr = waddr; #1;
      check(rdata == shadow[waddr], $sformatf("read-after-write addr %0d", waddr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
