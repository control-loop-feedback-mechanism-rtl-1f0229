`timescale 1ns/1ps
// throughput_monitor: measures the obtained throughput of a processing element,
// the quantity the frequency control loop regulates ("throughput monitoring"
// in the PID-controller diagram).
//
// In the PE clock domain a counter advances on every event pulse (here: every
// word the core writes to its output link). The count crosses into the
// reference clock domain as a Gray code through a two-flop synchronizer. In
// the reference domain a window timer of WINDOW cycles runs; at the end of each
// window the module outputs the number of events in that window (current count
// minus the count at the previous window end) and pulses meas_valid for one
// reference cycle. Because the window is timed on the fixed reference clock,
// the result is a true rate that does not change with the PE's own frequency.
// The description gives the function only; the measuring method, units
// (events per window) and WINDOW are this design's choices.
module throughput_monitor
  import gals_pkg::*;
#(
  parameter int WINDOW = 256,         // reference-clock cycles per measurement
  parameter int CNT_W  = TPUT_W       // event counter width
) (
  // PE clock domain
  input  logic              pe_clk,
  input  logic              pe_rst_n,
  input  logic              event_i,
  // reference clock domain
  input  logic              ref_clk,
  input  logic              ref_rst_n,
  output logic [CNT_W-1:0]  obtained,
  output logic              meas_valid
);
  logic [CNT_W-1:0] cnt_bin, cnt_gray, gray_ref, bin_ref, last;
  logic [$clog2(WINDOW)-1:0] timer;

  always_ff @(posedge pe_clk or negedge pe_rst_n) begin
    if (!pe_rst_n) begin
      cnt_bin  <= '0;
      cnt_gray <= '0;
    end else if (event_i) begin
      cnt_bin  <= cnt_bin + 1'b1;
      cnt_gray <= (cnt_bin + 1'b1) ^ ((cnt_bin + 1'b1) >> 1);
    end
  end

  sync_2ff #(.W(CNT_W)) u_sync (.clk(ref_clk), .rst_n(ref_rst_n), .d(cnt_gray), .q(gray_ref));

  always_comb begin
    bin_ref[CNT_W-1] = gray_ref[CNT_W-1];
    for (int i = CNT_W-2; i >= 0; i--) bin_ref[i] = bin_ref[i+1] ^ gray_ref[i];
  end

  always_ff @(posedge ref_clk or negedge ref_rst_n) begin
    if (!ref_rst_n) begin
      timer      <= '0;
      last       <= '0;
      obtained   <= '0;
      meas_valid <= 1'b0;
    end else begin
      meas_valid <= 1'b0;
      if (timer == ($clog2(WINDOW))'(WINDOW-1)) begin
        timer      <= '0;
        obtained   <= bin_ref - last;
        last       <= bin_ref;
        meas_valid <= 1'b1;
      end else begin
        timer <= timer + 1'b1;
      end
    end
  end
endmodule
