`timescale 1ns/1ps
// tb_pid_controller: applies random set points, measurements and gains and
// compares every controller output with a reference PID computed here in
// 64-bit integers (error, clamped running sum, first difference, gains with
// four fractional bits, output saturated to 12 bits). Also checks the
// one-cycle output latency, that the output holds between samples and that
// en low clears the integral.
module tb_pid_controller;
  logic clk = 0, rst_n = 0, en = 1, meas_valid = 0;
  logic [15:0] setpoint = 0, obtained = 0;
  logic [7:0] kp = 0, ki = 0, kd = 0;
  logic signed [11:0] u;
  logic u_valid;
  logic signed [16:0] err;
  int checks = 0, failures = 0;
  longint m_int = 0, m_prev = 0;

  always #5 clk = ~clk;
  pid_controller dut (.*);

  task automatic check(bit ok, string m);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", m); end
  endtask

  function automatic longint floor_div16(longint v);
    return (v >= 0) ? v / 16 : -((-v + 15) / 16);
  endfunction

  task automatic sample(int sp, int ob);
    longint e, s, exp_u;
    @(negedge clk);
    setpoint = 16'(sp); obtained = 16'(ob); meas_valid = 1;
    e = longint'(sp) - longint'(ob);
    m_int += e;
    if (m_int > 4095) m_int = 4095;
    if (m_int < -4095) m_int = -4095;
    s = e * kp + m_int * ki + (e - m_prev) * kd;
    m_prev = e;
    exp_u = floor_div16(s);
    if (exp_u > 2047) exp_u = 2047;
    if (exp_u < -2048) exp_u = -2048;
    @(negedge clk);
    meas_valid = 0;
    check(u_valid, "u_valid one cycle after meas_valid");
    check(longint'(u) == exp_u, $sformatf("u=%0d expected %0d (e=%0d)", u, exp_u, e));
    check(longint'(err) == e, "err");
    @(negedge clk);
    check(!u_valid, "u_valid is one cycle");
  endtask

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    kp = 8; ki = 4; kd = 2;
    // step response: set point 100, obtained follows a crude plant
    for (int i = 0; i < 50; i++) sample(100, 40 + i);
    // random
    for (int i = 0; i < 1000; i++) begin
      if (i % 100 == 0) begin kp = 8'($urandom); ki = 8'($urandom_range(0, 40)); kd = 8'($urandom_range(0, 40)); end
      sample($urandom_range(0, 300), $urandom_range(0, 300));
    end
    // en low clears state
    @(negedge clk); en = 0; @(negedge clk); en = 1;
    m_int = 0; m_prev = 0;
    kp = 0; ki = 16; kd = 0;
    sample(10, 0);
    check(u == 12'sd10, "integral restarts from zero after en low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
