`timescale 1ns/1ps
// pid_controller: the control-loop core of a processing element's frequency
// scaling. On each new throughput measurement it forms the error
//   e = set point - obtained throughput
// and the controller output
//   u = (Kp*e + Ki*sum(e) + Kd*(e - e_prev)) >>> GAIN_FRAC
// i.e. the proportional, integral and derivative branches of the design's PID
// diagram summed into one frequency correction. The structure and the error
// definition are the design's; the discrete form (sum for the integral,
// first difference for the derivative), the fixed-point format (gains unsigned
// with GAIN_FRAC fractional bits), the integral clamp at +/-INT_MAX against
// wind-up and the output clamp to OUT_W bits are this implementation's choices.
//
// Interface: meas_valid/obtained in, u_valid/u out, all on clk (the reference
// clock). Timing: u_valid follows meas_valid by one clock. Gains may change at
// any time and apply from the next measurement. Reset, or en low, clears the
// integral and the previous error.
module pid_controller
  import gals_pkg::*;
#(
  parameter int IN_W    = TPUT_W,
  parameter int OUT_W   = 12,
  parameter int INT_MAX = 4095
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,        // low: hold the loop cleared
  input  logic [IN_W-1:0]         setpoint,
  input  logic [IN_W-1:0]         obtained,
  input  logic                    meas_valid,
  input  logic [GAIN_W-1:0]       kp,
  input  logic [GAIN_W-1:0]       ki,
  input  logic [GAIN_W-1:0]       kd,
  output logic signed [OUT_W-1:0] u,
  output logic                    u_valid,
  output logic signed [IN_W:0]    err        // last error, for observation
);
  localparam int ACC_W = IN_W + GAIN_W + 4;
  localparam logic signed [OUT_W-1:0] U_MAX = {1'b0, {(OUT_W-1){1'b1}}};
  localparam logic signed [OUT_W-1:0] U_MIN = {1'b1, {(OUT_W-1){1'b0}}};

  logic signed [IN_W:0]   e, e_prev;
  logic signed [IN_W+2:0] integ, integ_next_raw, integ_next;
  logic signed [IN_W+1:0] deriv;
  logic signed [ACC_W-1:0] sum, scaled;

  assign e              = $signed({1'b0, setpoint}) - $signed({1'b0, obtained});
  assign integ_next_raw = integ + (IN_W+3)'(e);
  assign integ_next     = (integ_next_raw >  (IN_W+3)'(INT_MAX)) ? (IN_W+3)'(INT_MAX)  :
                          (integ_next_raw < -(IN_W+3)'(INT_MAX)) ? -(IN_W+3)'(INT_MAX) :
                          integ_next_raw;
  assign deriv          = (IN_W+2)'(e) - (IN_W+2)'(e_prev);
  assign sum            = ACC_W'(e)          * $signed({1'b0, kp}) +
                          ACC_W'(integ_next) * $signed({1'b0, ki}) +
                          ACC_W'(deriv)      * $signed({1'b0, kd});
  assign scaled         = sum >>> GAIN_FRAC;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_prev  <= '0;
      integ   <= '0;
      u       <= '0;
      u_valid <= 1'b0;
      err     <= '0;
    end else if (!en) begin
      e_prev  <= '0;
      integ   <= '0;
      u       <= '0;
      u_valid <= 1'b0;
    end else begin
      u_valid <= meas_valid;
      if (meas_valid) begin
        e_prev <= e;
        err    <= e;
        integ  <= integ_next;
        u      <= (scaled > ACC_W'(U_MAX)) ? U_MAX :
                  (scaled < ACC_W'(U_MIN)) ? U_MIN : OUT_W'(scaled);
      end
    end
  end
endmodule
