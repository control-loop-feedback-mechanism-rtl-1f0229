`timescale 1ns/1ps
// tb_dcfifo: self-checking test of the dual-clock FIFO. Writer and reader run
// on unrelated clocks (7 ns and 11 ns, then swapped speeds); both sides issue
// random traffic. A queue model checks every word read for value and order,
// that the FIFO never holds more than DEPTH words, that full and empty both
// occur, that every word written is eventually read, and that a word written
// into an empty FIFO becomes readable within 4 read-clock edges.
module tb_dcfifo;
  localparam int W = 16, D = 8;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic wvalid = 0, rd_en = 0, full, empty;
  logic [W-1:0] wdata = '0, rdata;
  real wper = 7.0, rper = 11.0;
  int checks = 0, failures = 0;
  int written = 0, read_n = 0, saw_full = 0, saw_empty = 0;
  logic [W-1:0] model [$];

  always #(wper/2) wclk = ~wclk;
  always #(rper/2) rclk = ~rclk;

  dcfifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // writer
  int wmode = 0;   // 0 random, 1 always
  always @(posedge wclk) begin
    if (wrst_n) begin
      if (wvalid && !full) begin model.push_back(wdata); written++; end
      if (full) saw_full++;
      wvalid <= (wmode == 1) ? 1'b1 : ($urandom_range(0, 3) != 0);
      wdata  <= W'($urandom);
    end
  end

  // reader
  int rmode = 0;   // 0 random, 1 always, 2 never
  always @(posedge rclk) begin
    if (rrst_n) begin
      if (rd_en && !empty) begin
        check(model.size() > 0, "read with model empty");
        if (model.size() > 0) begin
          logic [W-1:0] exp;
          exp = model.pop_front();
          check(rdata == exp, $sformatf("data %h expected %h", rdata, exp));
        end
        read_n++;
      end
      if (empty) saw_empty++;
      check(model.size() <= D, "more than DEPTH words held");
      rd_en <= (rmode == 1) ? 1'b1 : (rmode == 2) ? 1'b0 : ($urandom_range(0, 2) != 0);
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    repeat (3) @(posedge rclk);
    wrst_n = 1; rrst_n = 1;
    // latency: single word into an empty FIFO
    rmode = 2;
    @(posedge wclk); #1; wvalid = 0;
    wmode = 2; // hold writer idle via forced values below
    force wvalid = 1'b1;
    @(posedge wclk); #1;
    release wvalid; force wvalid = 1'b0;
    n = 0;
    while (empty && n < 10) begin @(posedge rclk); n++; end
    check(!empty && n <= 4, $sformatf("first word visible after %0d read edges", n));
    release wvalid;
    // fill until full with reader stopped
    wmode = 1;
    repeat (40) @(posedge wclk);
    check(full, "full not raised with reader stopped");
    check(written == D, $sformatf("accepted %0d words, expected %0d", written, D));
    // drain fully
    wmode = 2; force wvalid = 1'b0;
    rmode = 1;
    repeat (40) @(posedge rclk);
    check(empty, "empty not raised after drain");
    release wvalid;
    // random traffic, slow writer
    wmode = 0; rmode = 0;
    repeat (3000) @(posedge wclk);
    // swap speeds: fast writer, slow reader
    wper = 13.0; rper = 5.0;
    repeat (3000) @(posedge wclk);
    wper = 4.0; rper = 9.0;
    repeat (3000) @(posedge wclk);
    // stop writing and drain
    force wvalid = 1'b0;
    rmode = 1;
    repeat (60) @(posedge rclk);
    check(model.size() == 0, $sformatf("%0d words never came out", model.size()));
    check(read_n == written, $sformatf("read %0d written %0d", read_n, written));
    check(saw_full > 0 && saw_empty > 0, "full or empty never seen in random traffic");
    $display("written=%0d read=%0d full_cycles=%0d empty_cycles=%0d", written, read_n, saw_full, saw_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
