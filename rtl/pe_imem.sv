`timescale 1ns/1ps
// pe_imem: instruction memory of a processing element ("IMEM" in the PE
// diagram). A 64 x 27-bit array written over the configuration bus on the
// configuration clock and read asynchronously (combinationally) by the core in
// the PE's own clock domain. The program is loaded while the core is held
// stopped, so the two ports never touch the same word at once. Sizes and the
// asynchronous read are this design's choices.
module pe_imem
  import gals_pkg::*;
#(
  parameter int AW = IMEM_AW
) (
  input  logic          wclk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  instr_t        wdata,
  input  logic [AW-1:0] raddr,
  output instr_t        rdata
);
  instr_t mem [2**AW];

  always_ff @(posedge wclk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];
endmodule
