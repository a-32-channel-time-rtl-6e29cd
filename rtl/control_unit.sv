// control_unit -- register file holding every programmable setting of the
// time-tagging and coincidence unit.
//
// A write access (cmd_valid with cmd_write) stores cmd_data in the register
// at cmd_addr; a read access returns the register's value as a reply
// (reg_valid/reg_addr/reg_data) that the USB interface sends to the host.
// The settings leave as one cfg_t struct: run, test-pattern enable and run
// mode, coincidence window, event-filter threshold, status period, channel
// enables, edge polarity, the 8 trigger patterns, and per-channel offset
// and dead time. The register map is in ttcd_pkg. The paper names the
// control unit and lists the programmable settings; the map, the widths
// and the reset values are this design's. After reset the unit is stopped,
// in time-tagging mode, with all channels enabled on rising edges, offsets
// and dead times at zero, a window of 256 LSBs (one sampling period), a
// threshold of 1 and one status word per STATUS_DEFAULT cycles.
//
// Timing: a write takes effect on the cycle after cmd_valid; a reply is
// raised on that cycle and held until reg_ready. An unknown address reads 0.
`timescale 1ps/1fs
module control_unit
  import ttcd_pkg::*;
#(
  parameter int unsigned STATUS_DEFAULT = 440000   // 1 ms at 440 MHz
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  input  logic        cmd_write,
  input  logic [15:0] cmd_addr,
  input  logic [31:0] cmd_data,
  output logic        reg_valid,
  input  logic        reg_ready,
  output logic [15:0] reg_addr,
  output logic [31:0] reg_data,
  output cfg_t        cfg
);
  function automatic logic [31:0] read_reg(cfg_t c, logic [15:0] a);
    logic [31:0] v;
    v = '0;
    if (a == REG_CTRL)           v = {28'd0, c.mode, c.test_en, c.run};
    else if (a == REG_WINDOW)    v = 32'(c.window);
    else if (a == REG_THRESHOLD) v = 32'(c.threshold);
    else if (a == REG_STATUS_P)  v = c.status_period;
    else if (a == REG_CH_EN)     v = c.ch_en;
    else if (a == REG_FALLING)   v = c.falling;
    else if (a >= REG_PATTERN && a < REG_PATTERN + 16'(N_PATTERNS))
      v = c.pattern[3'(a - REG_PATTERN)];
    else if (a >= REG_OFFSET && a < REG_OFFSET + 16'(N_CH))
      v = 32'(c.offset[5'(a - REG_OFFSET)]);
    else if (a >= REG_DEAD && a < REG_DEAD + 16'(N_CH))
      v = 32'(c.dead[5'(a - REG_DEAD)]);
    return v;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg               <= '0;
      cfg.mode          <= MODE_TIMETAG;
      cfg.window        <= WINDOW_BITS'(256);
      cfg.threshold     <= THRESH_BITS'(1);
      cfg.status_period <= 32'(STATUS_DEFAULT);
      cfg.ch_en         <= '1;
      reg_valid         <= 1'b0;
      reg_addr          <= '0;
      reg_data          <= '0;
    end else begin
      if (reg_ready) reg_valid <= 1'b0;
      if (cmd_valid && cmd_write) begin
        if (cmd_addr == REG_CTRL) begin
          cfg.run     <= cmd_data[0];
          cfg.test_en <= cmd_data[1];
          cfg.mode    <= run_mode_e'(cmd_data[3:2]);
        end
        else if (cmd_addr == REG_WINDOW)    cfg.window        <= cmd_data[WINDOW_BITS-1:0];
        else if (cmd_addr == REG_THRESHOLD) cfg.threshold     <= cmd_data[THRESH_BITS-1:0];
        else if (cmd_addr == REG_STATUS_P)  cfg.status_period <= cmd_data;
        else if (cmd_addr == REG_CH_EN)     cfg.ch_en         <= cmd_data;
        else if (cmd_addr == REG_FALLING)   cfg.falling       <= cmd_data;
        else if (cmd_addr >= REG_PATTERN && cmd_addr < REG_PATTERN + 16'(N_PATTERNS))
          cfg.pattern[3'(cmd_addr - REG_PATTERN)] <= cmd_data;
        else if (cmd_addr >= REG_OFFSET && cmd_addr < REG_OFFSET + 16'(N_CH))
          cfg.offset[5'(cmd_addr - REG_OFFSET)] <= cmd_data[OFFSET_BITS-1:0];
        else if (cmd_addr >= REG_DEAD && cmd_addr < REG_DEAD + 16'(N_CH))
          cfg.dead[5'(cmd_addr - REG_DEAD)] <= cmd_data[DEAD_BITS-1:0];
      end
      if (cmd_valid && !cmd_write) begin
        reg_valid <= 1'b1;
        reg_addr  <= cmd_addr;
        reg_data  <= read_reg(cfg, cmd_addr);
      end
    end
  end
endmodule
