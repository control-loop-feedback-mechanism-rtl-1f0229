`timescale 1ns/1ps
// gals_cmp_top: the GALS (globally asynchronous, locally synchronous) chip
// multiprocessor: a ROWS x COLS mesh of processing elements, each clocked by
// its own oscillator and joined to its four neighbours by source-synchronous
// links that end in dual-clock FIFOs. Every PE runs a throughput-regulating
// frequency control loop (monitor -> PID -> frequency scaling -> oscillator).
// The 6 x 6 size is the mesh drawn in the design's architecture figure.
//
// Ports:
//  * ref_clk, arst_n: reference clock for configuration and control-loop
//    timing, and the chip reset (asynchronous assert, released per domain).
//  * run: starts (1) or stops (0) every core; pc returns to 0 when stopped.
//  * cfg_we/cfg_pe/cfg_addr/cfg_wdata: configuration bus on ref_clk; cfg_pe
//    selects the tile (row*COLS + col), cfg_addr/cfg_wdata as in pe_config.
//  * ext_in_*: an off-chip source feeding the west link of tile (0,0); it
//    brings its own clock and gets the FIFO's full flag back.
//  * ext_out_*: the west link of tile (ROWS-1, 0), with that tile's clock.
//    Like every link it is registered at the sender and must be sampled on
//    the falling edge of ext_out_clk. ext_in_* follows the same rule: the
//    FIFO samples ext_in_valid/ext_in_data on the falling edge of ext_in_clk.
//    With both external ports on the west edge, an even number of rows lets a
//    serpentine path pass through every tile.
//  * per-tile status: oscillator code, stall/retire counters, scaling counters
//    and the last throughput measurement.
// All other edge links are unused and tied off. The external port placement is
// this design's choice.
module gals_cmp_top
  import gals_pkg::*;
#(
  parameter int  ROWS     = 6,
  parameter int  COLS     = 6,
  parameter int  WINDOW   = 256,
  parameter int  FIFO_D   = FIFO_DEPTH,
  parameter int  STEP_KHZ = 5000
) (
  input  logic               ref_clk,
  input  logic               arst_n,
  input  logic               run,
  input  logic               cfg_we,
  input  logic [7:0]         cfg_pe,
  input  logic [CFG_AW-1:0]  cfg_addr,
  input  logic [CFG_DW-1:0]  cfg_wdata,
  input  logic               ext_in_clk,
  input  logic               ext_in_valid,
  input  word_t              ext_in_data,
  output logic               ext_in_full,
  output logic               ext_out_clk,
  output logic               ext_out_valid,
  output word_t              ext_out_data,
  input  logic               ext_out_full,
  output logic [FREQ_W-1:0]  freq_code     [ROWS*COLS],
  output logic [31:0]        n_empty_stall [ROWS*COLS],
  output logic [31:0]        n_full_stall  [ROWS*COLS],
  output logic [31:0]        n_retired     [ROWS*COLS],
  output logic [31:0]        n_scale_up    [ROWS*COLS],
  output logic [31:0]        n_scale_down  [ROWS*COLS],
  output logic [TPUT_W-1:0]  obtained      [ROWS*COLS]
);
  localparam int N = ROWS * COLS;

  word_t t_out_data  [N];
  logic  t_out_clk   [N];
  logic  t_out_valid [N][4];
  logic  t_in_full   [N][4];
  word_t t_in_data   [N][4];
  logic  t_in_valid  [N][4];
  logic  t_in_clk    [N][4];
  logic  t_out_full  [N][4];

  // direction d of tile (r,c) faces direction (d+2)%4 of its neighbour
  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int I = r*COLS + c;
      for (genvar d = 0; d < 4; d++) begin : g_dir
        localparam int NR = (d == 0) ? r-1 : (d == 2) ? r+1 : r;
        localparam int NC = (d == 1) ? c+1 : (d == 3) ? c-1 : c;
        localparam int OD = (d + 2) % 4;
        if (NR >= 0 && NR < ROWS && NC >= 0 && NC < COLS) begin : g_link
          localparam int J = NR*COLS + NC;
          assign t_in_data[I][d]  = t_out_data[J];
          assign t_in_valid[I][d] = t_out_valid[J][OD];
          assign t_in_clk[I][d]   = t_out_clk[J];
          assign t_out_full[I][d] = t_in_full[J][OD];
        end else if (r == 0 && c == 0 && d == int'(DIR_W)) begin : g_ext_in
          assign t_in_data[I][d]  = ext_in_data;
          assign t_in_valid[I][d] = ext_in_valid;
          assign t_in_clk[I][d]   = ext_in_clk;
          assign t_out_full[I][d] = 1'b1;
        end else if (r == ROWS-1 && c == 0 && d == int'(DIR_W)) begin : g_ext_out
          assign t_in_data[I][d]  = '0;
          assign t_in_valid[I][d] = 1'b0;
          assign t_in_clk[I][d]   = 1'b0;
          assign t_out_full[I][d] = ext_out_full;
        end else begin : g_edge
          assign t_in_data[I][d]  = '0;
          assign t_in_valid[I][d] = 1'b0;
          assign t_in_clk[I][d]   = 1'b0;
          assign t_out_full[I][d] = 1'b1;
        end
      end

      pe_tile #(.WINDOW(WINDOW), .FIFO_D(FIFO_D), .STEP_KHZ(STEP_KHZ)) u_tile (
        .ref_clk(ref_clk), .arst_n(arst_n), .run(run),
        .cfg_we(cfg_we && cfg_pe == 8'(I)), .cfg_addr(cfg_addr), .cfg_wdata(cfg_wdata),
        .in_data(t_in_data[I]), .in_valid(t_in_valid[I]), .in_clk(t_in_clk[I]),
        .in_full(t_in_full[I]),
        .out_data(t_out_data[I]), .out_valid(t_out_valid[I]), .out_clk(t_out_clk[I]),
        .out_full(t_out_full[I]),
        .freq_code(freq_code[I]), .n_empty_stall(n_empty_stall[I]),
        .n_full_stall(n_full_stall[I]), .n_retired(n_retired[I]),
        .n_scale_up(n_scale_up[I]), .n_scale_down(n_scale_down[I]),
        .obtained(obtained[I])
      );
    end
  end

  assign ext_in_full   = t_in_full[0][3];
  assign ext_out_clk   = t_out_clk[(ROWS-1)*COLS];
  assign ext_out_valid = t_out_valid[(ROWS-1)*COLS][3];
  assign ext_out_data  = t_out_data[(ROWS-1)*COLS];
endmodule
