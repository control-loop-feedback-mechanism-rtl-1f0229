`timescale 1ns/1ps
// dcfifo: dual-clock FIFO, the asynchronous boundary between two processors.
//
// Structure follows the clock-domain block diagram of the design: a write
// controller in the write clock domain (takes "valid" and data, raises
// "full"), a two-port memory written on the write clock and read in the read
// clock domain, a read controller (raises "empty"), and an address
// synchronization block that passes the write address to the read side and the
// read address to the write side. The address passing is done here with Gray
// coded pointers and two-flop synchronizers; that scheme is this design's
// choice (the diagram shows only a box exchanging the two addresses).
//
// Interface: wvalid writes wdata on a rising wclk edge when not full. The read
// side is first-word-fall-through: rdata shows the oldest word whenever empty
// is low, and rd_en pops it on a rising rclk edge.
// Timing: a written word becomes visible to the reader 2-3 rclk edges later
// (pointer synchronization); freed space reaches the writer 2-3 wclk edges
// after a pop. full and empty are therefore conservative, never optimistic.
// A write while full and a read while empty are ignored. full is high while
// the write side is in reset, so no writer loses a word to a FIFO that is not
// ready yet.
module dcfifo #(
  parameter int WIDTH = gals_pkg::DATA_W,
  parameter int DEPTH = gals_pkg::FIFO_DEPTH   // power of two
) (
  // write clock domain
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wvalid,
  input  logic [WIDTH-1:0] wdata,
  output logic             full,
  // read clock domain
  input  logic             rclk,
  input  logic             rrst_n,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rdata,
  output logic             empty
);
  localparam int AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w, wgray_r;   // synchronized copies

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---- write controller ----
  logic [AW:0] wbin_next;
  logic        wr_fire;
  assign wr_fire   = wvalid && !full;
  assign wbin_next = wbin + (AW+1)'(wr_fire);

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin  <= '0;
      wgray <= '0;
      full  <= 1'b1;   // refuse writes until the write side is out of reset
    end else begin
      wbin  <= wbin_next;
      wgray <= bin2gray(wbin_next);
      // full: next write pointer equals read pointer with the top two Gray bits inverted
      full  <= (bin2gray(wbin_next) ==
                {~rgray_w[AW:AW-1], rgray_w[AW-2:0]});
    end
  end

  always_ff @(posedge wclk) begin
    if (wr_fire) mem[wbin[AW-1:0]] <= wdata;
  end

  // ---- address synchronization ----
  sync_2ff #(.W(AW+1)) u_sync_r2w (.clk(wclk), .rst_n(wrst_n), .d(rgray), .q(rgray_w));
  sync_2ff #(.W(AW+1)) u_sync_w2r (.clk(rclk), .rst_n(rrst_n), .d(wgray), .q(wgray_r));

  // ---- read controller ----
  logic [AW:0] rbin_next;
  logic        rd_fire;
  assign rd_fire   = rd_en && !empty;
  assign rbin_next = rbin + (AW+1)'(rd_fire);

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin  <= '0;
      rgray <= '0;
      empty <= 1'b1;
    end else begin
      rbin  <= rbin_next;
      rgray <= bin2gray(rbin_next);
      empty <= (bin2gray(rbin_next) == wgray_r);
    end
  end

  assign rdata = mem[rbin[AW-1:0]];

endmodule
