`timescale 1ns/1ps
// pe_dmem: data memory of a processing element ("DMEM" in the PE diagram).
// 128 words of DATA_W bits, one asynchronous read port and one write port
// clocked by the PE clock; a write is visible to a read on the next cycle.
// Depth and the asynchronous read are this design's choices.
module pe_dmem
  import gals_pkg::*;
#(
  parameter int AW = DMEM_AW
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  word_t         wdata,
  input  logic [AW-1:0] raddr,
  output word_t         rdata
);
  word_t mem [2**AW];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];
endmodule
