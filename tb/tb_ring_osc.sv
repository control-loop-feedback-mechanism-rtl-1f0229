`timescale 1ns/1ps
// tb_ring_osc: measures the oscillator period for several codes and checks
// f = code * 5 MHz within 0.1 %, that a new code takes effect within two
// periods, that code 0 runs at the code-1 frequency and that en low stops the
// clock at 0.
module tb_ring_osc;
  logic en = 0, clk;
  logic [7:0] freq_code = 100;
  int checks = 0, failures = 0;
  ring_osc dut (.*);
  task automatic check(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask
  task automatic measure(int code);
    realtime t0, t1, exp_ns;
    int c;
    freq_code = 8'(code);
    repeat (3) @(posedge clk);
    t0 = $realtime;
    repeat (10) @(posedge clk);
    t1 = $realtime;
    c = (code == 0) ? 1 : code;
    exp_ns = 1000.0 / (5.0 * c);
    check((t1 - t0) / 10.0 > exp_ns * 0.999 && (t1 - t0) / 10.0 < exp_ns * 1.001,
          $sformatf("code %0d period %f expected %f", code, (t1 - t0) / 10.0, exp_ns));
  endtask
  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    #50;
    check(clk == 0, "stopped while en low");
    en = 1;
    measure(100); measure(4); measure(250); measure(37); measure(0); measure(200);
    en = 0;
    #500;
    check(clk == 0, "rests at 0 after en low");
    begin
      bit toggled = 0;
      fork
        begin @(clk); toggled = 1; end
        #1000;
      join_any
      disable fork;
      check(!toggled, "no edges while stopped");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
