`timescale 1ps/1ps
// ring_osc: BEHAVIOURAL MODEL (not synthesizable) of a processing element's
// programmable ring oscillator ("OSC" in the PE diagram), the local clock
// source that gives every processor its own clock domain. On silicon this is
// a ring of inverters with selectable stage count and drive strength; here it
// is a timed model whose frequency is linear in the code:
//   f = max(freq_code, 1) * STEP_KHZ kHz   (default 5 MHz per step)
// The code is sampled at every rising edge, so a new setting takes effect on
// the following cycle, as a real oscillator changes without glitching. While
// en is low the output rests at 0. The linear code-to-frequency law and the
// step size are this model's choices; the description only says the
// oscillators are configurable over a wide range of frequencies. The delay is
// computed at run time in whole picoseconds (this file's time unit), so a lint
// tool cannot prove it non-zero; it is at least 500000000/(STEP_KHZ*255) ps,
// never zero. Rounding to 1 ps changes a period by under 0.1 %.
module ring_osc
  import gals_pkg::*;
#(
  parameter int  STEP_KHZ = 5000
) (
  input  logic              en,
  input  logic [FREQ_W-1:0] freq_code,
  output logic              clk
);
  int unsigned half_ps;

  initial clk = 1'b0;

  always begin
    if (!en) begin
      clk = 1'b0;
      @(posedge en);
    end else begin
      half_ps = 500_000_000 / (STEP_KHZ * ((freq_code == '0) ? 1 : int'(freq_code)));
      #(half_ps) clk = 1'b1;
      #(half_ps) clk = 1'b0;
    end
  end
endmodule
