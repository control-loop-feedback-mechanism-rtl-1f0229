`timescale 1ns/1ps
// rst_sync: reset synchronizer. Asserts its active-low output at once when
// the asynchronous input reset asserts, and releases it two edges of the local
// clock after the input reset releases, so each clock domain of the chip
// leaves reset cleanly on its own clock.
module rst_sync (
  input  logic clk,
  input  logic arst_n,
  output logic rst_n
);
  logic meta;
  always_ff @(posedge clk or negedge arst_n) begin
    if (!arst_n) begin
      meta  <= 1'b0;
      rst_n <= 1'b0;
    end else begin
      meta  <= 1'b1;
      rst_n <= meta;
    end
  end
endmodule
