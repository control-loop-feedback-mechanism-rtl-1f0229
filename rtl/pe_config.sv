`timescale 1ns/1ps
// pe_config: configuration block of a processing element ("config" in the PE
// diagram). It decodes writes from the chip's configuration bus, which runs on
// the reference clock: a write whose address has bit 8 clear goes to the
// instruction memory, one with bit 8 set loads a register:
//   0 FIFO0 source direction   1 FIFO1 source direction   2 output direction
//   3 throughput set point     4 initial/base frequency code
//   5 frequency-scaling enable 6 Kp   7 Ki   8 Kd   (gains: 4 fractional bits)
// Registers take effect one reference-clock edge after the write. The routing
// registers are meant to be written while the cores are stopped. The reset
// gains (Kp = Ki = 1/16, Kd = 0) give a stable, non-oscillating loop for the
// default 256-cycle window and 5 MHz oscillator step, where one code step
// changes a two-instruction loop's output by about 6 words per window. The register
// map and reset values are this design's choices; the description only shows a
// "config" box in each PE and says the PID gains must be "correctly chosen".
module pe_config
  import gals_pkg::*;
#(
  parameter logic [FREQ_W-1:0] FREQ_RESET = 8'd100,
  parameter logic [GAIN_W-1:0] KP_RESET   = 8'd1,   // 1/16
  parameter logic [GAIN_W-1:0] KI_RESET   = 8'd1,   // 1/16
  parameter logic [GAIN_W-1:0] KD_RESET   = 8'd0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cfg_we,      // bus write strobe, already decoded for this PE
  input  logic [CFG_AW-1:0]   cfg_addr,
  input  logic [CFG_DW-1:0]   cfg_wdata,
  // instruction memory write port
  output logic                imem_we,
  output logic [IMEM_AW-1:0]  imem_waddr,
  output instr_t              imem_wdata,
  // registers
  output dir_e                in_sel0,
  output dir_e                in_sel1,
  output dir_e                out_dir,
  output logic [TPUT_W-1:0]   setpoint,
  output logic [FREQ_W-1:0]   freq_init,
  output logic                dfs_en,
  output logic [GAIN_W-1:0]   kp,
  output logic [GAIN_W-1:0]   ki,
  output logic [GAIN_W-1:0]   kd
);
  logic     reg_we;
  cfg_reg_e reg_sel;

  assign imem_we    = cfg_we && !cfg_addr[8];
  assign imem_waddr = cfg_addr[IMEM_AW-1:0];
  assign imem_wdata = instr_t'(cfg_wdata[INSTR_W-1:0]);
  assign reg_we     = cfg_we && cfg_addr[8];
  assign reg_sel    = cfg_reg_e'(cfg_addr[3:0]);

  function automatic dir_e to_dir(logic [2:0] v);
    return (v > 3'd4) ? DIR_NONE : dir_e'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_sel0   <= DIR_NONE;
      in_sel1   <= DIR_NONE;
      out_dir   <= DIR_NONE;
      setpoint  <= '0;
      freq_init <= FREQ_RESET;
      dfs_en    <= 1'b0;
      kp        <= KP_RESET;
      ki        <= KI_RESET;
      kd        <= KD_RESET;
    end else if (reg_we) begin
      case (reg_sel)
        REG_IN_SEL0:   in_sel0   <= to_dir(cfg_wdata[2:0]);
        REG_IN_SEL1:   in_sel1   <= to_dir(cfg_wdata[2:0]);
        REG_OUT_DIR:   out_dir   <= to_dir(cfg_wdata[2:0]);
        REG_SETPOINT:  setpoint  <= cfg_wdata[TPUT_W-1:0];
        REG_FREQ_INIT: freq_init <= cfg_wdata[FREQ_W-1:0];
        REG_DFS_EN:    dfs_en    <= cfg_wdata[0];
        REG_KP:        kp        <= cfg_wdata[GAIN_W-1:0];
        REG_KI:        ki        <= cfg_wdata[GAIN_W-1:0];
        REG_KD:        kd        <= cfg_wdata[GAIN_W-1:0];
        default: ;
      endcase
    end
  end
endmodule
