`timescale 1ns/1ps
// freq_scaler: the frequency scaling module of a processing element. It turns
// the PID controller's output into the code that sets the PE's programmable
// oscillator:
//   freq_code = clamp(base + u, FMIN, FMAX)   when scaling is enabled
//   freq_code = clamp(base, FMIN, FMAX)       when it is disabled
// and reports whether each update scaled the frequency up or down. The
// description says only that this module "scales up and down the frequency of
// the processor"; the base-plus-correction form and the clamp limits are this
// design's choices. Timing: freq_code updates one clock after u_valid (or one
// clock after base/enable change when disabled).
module freq_scaler
  import gals_pkg::*;
#(
  parameter int                 U_W  = 12,
  parameter logic [FREQ_W-1:0]  FMIN = 8'd4,
  parameter logic [FREQ_W-1:0]  FMAX = 8'd250
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic [FREQ_W-1:0]     base,
  input  logic signed [U_W-1:0] u,
  input  logic                  u_valid,
  output logic [FREQ_W-1:0]     freq_code,
  output logic                  scaled_up,    // one-cycle pulses
  output logic                  scaled_down
);
  logic signed [U_W+1:0] target;
  logic [FREQ_W-1:0]     next;

  logic signed [U_W+1:0] base_s, fmin_s, fmax_s;
  assign base_s = (U_W+2)'({1'b0, base});
  assign fmin_s = (U_W+2)'({1'b0, FMIN});
  assign fmax_s = (U_W+2)'({1'b0, FMAX});
  assign target = en ? (base_s + (U_W+2)'(u)) : base_s;
  assign next   = (target < fmin_s) ? FMIN :
                  (target > fmax_s) ? FMAX : FREQ_W'(target);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      freq_code   <= FMIN;
      scaled_up   <= 1'b0;
      scaled_down <= 1'b0;
    end else begin
      scaled_up   <= 1'b0;
      scaled_down <= 1'b0;
      if (u_valid || !en) begin
        freq_code   <= next;
        scaled_up   <= next > freq_code;
        scaled_down <= next < freq_code;
      end
    end
  end
endmodule
