`timescale 1ns/1ps
// tb_freq_scaler: random base codes and PID corrections; checks the
// oscillator code equals clamp(base + u, 4, 250) after each update when
// enabled, equals the base when disabled, holds between updates, and that the
// up/down pulses match the direction of each change.
module tb_freq_scaler;
  logic clk = 0, rst_n = 0, en = 0, u_valid = 0;
  logic [7:0] base = 100;
  logic signed [11:0] u = 0;
  logic [7:0] freq_code;
  logic scaled_up, scaled_down;
  int checks = 0, failures = 0, n_up = 0, n_down = 0;
  always #5 clk = ~clk;
  freq_scaler dut (.*);
  task automatic check(bit ok, string m);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", m); end
  endtask
  function automatic int clampf(int v);
    return v < 4 ? 4 : v > 250 ? 250 : v;
  endfunction
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int prev, exp_code;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(freq_code == 100, "disabled: code follows base");
    base = 2; @(negedge clk);
    check(freq_code == 4, "disabled: base clamped to FMIN");
    en = 1; base = 120;
    for (int i = 0; i < 2000; i++) begin
      if (i % 97 == 0) base = 8'($urandom);
      @(negedge clk);
      prev = freq_code;
      u = 12'($signed($urandom_range(0, 800)) - 400);
      u_valid = 1;
      exp_code = clampf(int'(base) + int'(u));
      @(negedge clk); u_valid = 0;
      check(int'(freq_code) == exp_code, $sformatf("code %0d expected %0d", freq_code, exp_code));
      check(scaled_up == (exp_code > prev) && scaled_down == (exp_code < prev), "direction pulses");
      n_up += int'(scaled_up); n_down += int'(scaled_down);
      u = 12'sd5;
      @(negedge clk);
      check(int'(freq_code) == exp_code && !scaled_up && !scaled_down, "hold without u_valid");
    end
    check(n_up > 100 && n_down > 100, "both directions seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
