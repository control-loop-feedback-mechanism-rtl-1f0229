`timescale 1ns/1ps
// sync_2ff: two-flop synchronizer for a bus that changes at most one bit at a
// time (a Gray-coded pointer) or for a slow level signal. Output lags the
// input by two destination clock edges. Reset clears both stages.
module sync_2ff #(
  parameter int W = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  logic [W-1:0] meta;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meta <= '0;
      q    <= '0;
    end else begin
      meta <= d;
      q    <= meta;
    end
  end
endmodule
