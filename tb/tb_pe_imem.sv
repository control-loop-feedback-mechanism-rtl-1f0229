`timescale 1ns/1ps
// tb_pe_imem: writes random instructions to every address of the instruction
// memory, then reads them back in random order, checking each against a copy.
module tb_pe_imem;
  import gals_pkg::*;
  logic wclk = 0, we = 0;
  logic [IMEM_AW-1:0] waddr = '0, raddr = '0;
  instr_t wdata, rdata, shadow [2**IMEM_AW];
  int checks = 0, failures = 0;
  always #5 wclk = ~wclk;
  pe_imem dut (.*);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 2**IMEM_AW; i++) begin
      @(negedge wclk);
      we = 1; waddr = IMEM_AW'(i); wdata = instr_t'($urandom); shadow[i] = wdata;
    end
    @(negedge wclk); we = 0;
    for (int k = 0; k < 500; k++) begin
      raddr = IMEM_AW'($urandom); #1;
      checks++;
      if (rdata !== shadow[raddr]) begin failures++; $display("FAIL addr %0d", raddr); end
      // occasional overwrite, visible after the write edge
      if (k % 50 == 0) begin
        @(negedge wclk); we = 1; waddr = raddr; wdata = instr_t'($urandom); shadow[raddr] = wdata;
        @(negedge wclk); we = 0; #1;
        checks++;
        if (rdata !== shadow[raddr]) begin failures++; $display("FAIL overwrite %0d", raddr); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
