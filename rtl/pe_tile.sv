`timescale 1ns/1ps
// pe_tile: one processing element (PE) of the GALS mesh, with everything the
// design's PE diagram shows: two dual-clock input FIFOs (FIFO0, FIFO1), the
// ALU/MAC core with its instruction and data memories, the configuration
// block, and the local programmable oscillator (OSC); plus the frequency
// control loop the design adds to every PE: a throughput monitor, a PID
// controller and a frequency scaling module that sets the oscillator.
//
// Clock domains: the core, the FIFOs' read sides and the throughput counter
// run on the tile's own oscillator clock (pe_clk). Each FIFO's write side runs
// on the clock of the neighbour it listens to, which arrives with the data
// (source-synchronous link): the FIFO is the only place where the two domains
// meet. The sender launches data, valid and its clock together on its rising
// edge; the FIFO's write side runs on the inverted forwarded clock, so it
// samples the link half a sender cycle later, in the middle of the data eye.
// Its full flag, updated on that falling edge, is back at the sender before
// the sender's next rising edge. Receivers of a link must therefore sample on
// the falling edge of the link clock. Configuration, window timing, PID and frequency scaling run on the
// chip's reference clock.
//
// Links: every tile drives the same data and clock to all four neighbours and
// raises valid only toward the direction chosen by its out_dir register. Each
// input FIFO takes data, valid and clock from the direction chosen by its
// in_sel register; its full flag is returned toward that same direction (a direction that no
// FIFO listens to reports full). So a
// link is set up by pointing one tile's out_dir at a neighbour whose FIFO
// in_sel points back. This routing scheme is this design's choice; the
// description shows only a mesh of PEs each with two input FIFOs.
//
// Control loop timing: one throughput sample per WINDOW reference cycles, the
// PID output one cycle later, the new oscillator code one cycle after that; the
// oscillator switches at its next rising edge.
module pe_tile
  import gals_pkg::*;
#(
  parameter int  WINDOW    = 256,
  parameter int  FIFO_D    = FIFO_DEPTH,
  parameter int  STEP_KHZ  = 5000
) (
  input  logic                ref_clk,
  input  logic                arst_n,
  input  logic                run,           // reference domain, start/stop all cores
  // configuration bus (reference domain, already decoded for this tile)
  input  logic                cfg_we,
  input  logic [CFG_AW-1:0]   cfg_addr,
  input  logic [CFG_DW-1:0]   cfg_wdata,
  // links from the four neighbours, indexed by dir_e (N, E, S, W)
  input  word_t               in_data  [4],
  input  logic                in_valid [4],
  input  logic                in_clk   [4],
  output logic                in_full  [4],  // returned to the neighbour in that direction
  // link to the neighbours
  output word_t               out_data,
  output logic                out_valid [4],
  output logic                out_clk,
  input  logic                out_full  [4], // full flag sent back by each neighbour
  // status
  output logic [FREQ_W-1:0]   freq_code,
  output logic [31:0]         n_empty_stall,  // pe_clk domain counters
  output logic [31:0]         n_full_stall,
  output logic [31:0]         n_retired,
  output logic [31:0]         n_scale_up,     // reference domain counters
  output logic [31:0]         n_scale_down,
  output logic [TPUT_W-1:0]   obtained
);
  // ---------------- clocks and resets ----------------
  logic pe_clk, pe_rst_n, ref_rst_n, run_pe;

  ring_osc #(.STEP_KHZ(STEP_KHZ)) u_osc (.en(1'b1), .freq_code(freq_code), .clk(pe_clk));
  rst_sync u_rst_pe  (.clk(pe_clk),  .arst_n(arst_n), .rst_n(pe_rst_n));
  rst_sync u_rst_ref (.clk(ref_clk), .arst_n(arst_n), .rst_n(ref_rst_n));
  sync_2ff #(.W(1)) u_run_sync (.clk(pe_clk), .rst_n(pe_rst_n), .d(run), .q(run_pe));

  assign out_clk = pe_clk;

  // ---------------- configuration ----------------
  logic               imem_we;
  logic [IMEM_AW-1:0] imem_waddr;
  instr_t             imem_wdata;
  dir_e               in_sel [2];
  dir_e               out_dir;
  logic [TPUT_W-1:0]  setpoint;
  logic [FREQ_W-1:0]  freq_init;
  logic               dfs_en;
  logic [GAIN_W-1:0]  kp, ki, kd;

  pe_config u_cfg (
    .clk(ref_clk), .rst_n(ref_rst_n),
    .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_wdata(cfg_wdata),
    .imem_we(imem_we), .imem_waddr(imem_waddr), .imem_wdata(imem_wdata),
    .in_sel0(in_sel[0]), .in_sel1(in_sel[1]), .out_dir(out_dir),
    .setpoint(setpoint), .freq_init(freq_init), .dfs_en(dfs_en),
    .kp(kp), .ki(ki), .kd(kd)
  );

  // ---------------- input FIFOs ----------------
  word_t fifo_rdata [2];
  logic  fifo_empty [2], fifo_pop [2], fifo_full [2];
  logic  fifo_wclk  [2], fifo_wvalid [2], fifo_wrst_n [2];
  word_t fifo_wdata [2];

  for (genvar k = 0; k < 2; k++) begin : g_fifo
    always_comb begin
      if (in_sel[k] == DIR_NONE) begin
        fifo_wclk[k]   = 1'b0;
        fifo_wvalid[k] = 1'b0;
        fifo_wdata[k]  = '0;
      end else begin
        fifo_wclk[k]   = ~in_clk[in_sel[k][1:0]];   // capture on the falling edge
        fifo_wvalid[k] = in_valid[in_sel[k][1:0]];
        fifo_wdata[k]  = in_data[in_sel[k][1:0]];
      end
    end

    rst_sync u_rst_w (.clk(fifo_wclk[k]), .arst_n(arst_n), .rst_n(fifo_wrst_n[k]));

    dcfifo #(.WIDTH(DATA_W), .DEPTH(FIFO_D)) u_fifo (
      .wclk(fifo_wclk[k]), .wrst_n(fifo_wrst_n[k]), .wvalid(fifo_wvalid[k]),
      .wdata(fifo_wdata[k]), .full(fifo_full[k]),
      .rclk(pe_clk), .rrst_n(pe_rst_n), .rd_en(fifo_pop[k]),
      .rdata(fifo_rdata[k]), .empty(fifo_empty[k])
    );
  end

  always_comb begin
    for (int d = 0; d < 4; d++) begin
      // a direction no FIFO listens to reports full, so a sender waits
      // instead of losing words
      in_full[d] = (in_sel[0] != dir_e'(d) && in_sel[1] != dir_e'(d)) ||
                   (in_sel[0] == dir_e'(d) && fifo_full[0]) ||
                   (in_sel[1] == dir_e'(d) && fifo_full[1]);
    end
  end

  // ---------------- core ----------------
  logic [IMEM_AW-1:0] pc;
  instr_t             instr;
  logic               core_valid, core_full;
  logic               ev_empty, ev_full, ev_retire;

  pe_imem u_imem (
    .wclk(ref_clk), .we(imem_we), .waddr(imem_waddr), .wdata(imem_wdata),
    .raddr(pc), .rdata(instr)
  );

  assign core_full = (out_dir == DIR_NONE) ? 1'b1 : out_full[out_dir[1:0]];

  pe_core u_core (
    .clk(pe_clk), .rst_n(pe_rst_n), .run(run_pe),
    .pc(pc), .instr(instr),
    .fifo0_rdata(fifo_rdata[0]), .fifo0_empty(fifo_empty[0]), .fifo0_pop(fifo_pop[0]),
    .fifo1_rdata(fifo_rdata[1]), .fifo1_empty(fifo_empty[1]), .fifo1_pop(fifo_pop[1]),
    .out_data(out_data), .out_valid(core_valid), .out_full(core_full),
    .stall_empty(ev_empty), .stall_full(ev_full), .retire(ev_retire)
  );

  always_comb begin
    for (int d = 0; d < 4; d++) out_valid[d] = core_valid && (out_dir == dir_e'(d));
  end

  always_ff @(posedge pe_clk or negedge pe_rst_n) begin
    if (!pe_rst_n) begin
      n_empty_stall <= '0;
      n_full_stall  <= '0;
      n_retired     <= '0;
    end else begin
      n_empty_stall <= n_empty_stall + 32'(ev_empty);
      n_full_stall  <= n_full_stall  + 32'(ev_full);
      n_retired     <= n_retired     + 32'(ev_retire);
    end
  end

  // ---------------- frequency control loop ----------------
  logic                    meas_valid, u_valid, up, down;
  logic signed [11:0]      u;
  logic signed [TPUT_W:0]  err;

  throughput_monitor #(.WINDOW(WINDOW)) u_mon (
    .pe_clk(pe_clk), .pe_rst_n(pe_rst_n), .event_i(core_valid),
    .ref_clk(ref_clk), .ref_rst_n(ref_rst_n),
    .obtained(obtained), .meas_valid(meas_valid)
  );

  pid_controller #(.OUT_W(12)) u_pid (
    .clk(ref_clk), .rst_n(ref_rst_n), .en(dfs_en),
    .setpoint(setpoint), .obtained(obtained), .meas_valid(meas_valid),
    .kp(kp), .ki(ki), .kd(kd), .u(u), .u_valid(u_valid), .err(err)
  );

  freq_scaler #(.U_W(12)) u_fs (
    .clk(ref_clk), .rst_n(ref_rst_n), .en(dfs_en), .base(freq_init),
    .u(u), .u_valid(u_valid), .freq_code(freq_code),
    .scaled_up(up), .scaled_down(down)
  );

  always_ff @(posedge ref_clk or negedge ref_rst_n) begin
    if (!ref_rst_n) begin
      n_scale_up   <= '0;
      n_scale_down <= '0;
    end else begin
      n_scale_up   <= n_scale_up   + 32'(up);
      n_scale_down <= n_scale_down + 32'(down);
    end
  end
endmodule
