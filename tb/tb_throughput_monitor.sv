`timescale 1ns/1ps
// tb_throughput_monitor: feeds event pulses at several rates on a PE clock
// unrelated to the reference clock and checks each reported window count
// against the number of events the testbench itself counted in that window
// (the report may miss the few events still crossing the two-flop
// synchronizer, which then appear in the next window),
// that the sum of all reports equals the total of settled events, and that a
// report arrives every WINDOW reference cycles exactly.
module tb_throughput_monitor;
  localparam int WINDOW = 64;
  logic pe_clk = 0, pe_rst_n = 0, event_i = 0, ref_clk = 0, ref_rst_n = 0;
  logic [15:0] obtained;
  logic meas_valid;
  int checks = 0, failures = 0;
  real pe_half = 3.1;
  int rate = 2;   // event probability in quarters
  longint ev_total = 0, rep_total = 0;
  int nrep = 0, ref_cyc = 0, last_rep_cyc = -1;

  always #(pe_half) pe_clk = ~pe_clk;
  always #5 ref_clk = ~ref_clk;

  throughput_monitor #(.WINDOW(WINDOW)) dut (.*);

  task automatic check(bit ok, string m);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", m); end
  endtask

  always @(posedge pe_clk) begin
    if (event_i && pe_rst_n) ev_total++;
    event_i <= ($urandom_range(0, 3) < rate);
  end

  always @(posedge ref_clk) begin
    if (ref_rst_n) begin
      ref_cyc++;
      if (meas_valid) begin
        longint d;
        d = ev_total - rep_total;   // events not yet reported
        check(longint'(obtained) <= d && longint'(obtained) + 8 >= d,
              $sformatf("window %0d: obtained %0d, unreported events %0d", nrep, obtained, d));
        if (last_rep_cyc >= 0) check(ref_cyc - last_rep_cyc == WINDOW, "window period");
        last_rep_cyc = ref_cyc;
        rep_total += obtained;
        nrep++;
      end
    end
  end

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (4) @(posedge ref_clk);
    pe_rst_n = 1; ref_rst_n = 1;
    for (int r = 0; r <= 4; r++) begin
      rate = r;
      pe_half = 2.0 + 1.3 * r;
      repeat (WINDOW * 4) @(posedge ref_clk);
    end
    rate = 0;
    repeat (WINDOW * 2 + 2) @(posedge ref_clk);
    check(rep_total == ev_total, $sformatf("reported %0d of %0d events", rep_total, ev_total));
    check(nrep >= 20, "too few reports");
    $display("reports=%0d events=%0d", nrep, ev_total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
