// ttcd_top -- FPGA top level of the 32-channel time-tagging and coincidence
// detector unit.
//
// Edges on the 32 SMA inputs are time-tagged by the MCTTU (about 8.9 ps
// steps, 440 MHz sampling clock) and leave it as one time-sorted stream.
// That stream feeds both the coincidence processor, which groups tags into
// coincidence vectors over a programmable window and drops vectors with too
// few channels, and the protocol generator. The vectors go to the pattern
// trigger, which drives the 8 trigger outputs, and to the protocol
// generator. The protocol generator sends time-tags or vectors, depending
// on the run mode, plus periodic status words, to the USB interface; host
// commands come back through it into the control unit, whose registers set
// up all other blocks. This is the structure of the paper's FPGA design.
// Not included: the logic analyzer (its function is not described) and the
// PCIe x4 port (vendor hard IP). Everything runs on the one sampling clock
// `clk`; the board PLL, the external USB-3 bridge and the 2 MHz test
// oscillator are outside and reach the design through ports.
//
// Ports: clk/rst_n, sma_in[32], test_clk (2 MHz test oscillator),
// test_oe (the input pins are driven with the test pattern), trig_out[8],
// the USB bridge bus (usb_*), and a few counters for observation.
`timescale 1ps/1fs
module ttcd_top
  import ttcd_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH     = 512,
  parameter int unsigned USB_DEPTH      = 1024,
  parameter int unsigned HOLDOFF        = 16,
  parameter int unsigned PULSE_CYCLES   = 10,
  parameter int unsigned STATUS_DEFAULT = 440000
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [N_CH-1:0]       sma_in,
  input  logic                  test_clk,
  output logic                  test_oe,
  output logic [N_PATTERNS-1:0] trig_out,
  output logic [31:0]           usb_dout,
  output logic                  usb_wr,
  input  logic                  usb_full,
  input  logic [31:0]           usb_din,
  input  logic                  usb_din_valid,
  output logic [31:0]           drop_fifo,
  output logic [31:0]           drop_dead,
  output logic [31:0]           n_filtered
);
  cfg_t cfg;

  // MCTTU
  logic                   tt_valid, tt_ready;
  chan_tag_t              tt_data;
  tag_t                   tt_safe;
  logic [COARSE_BITS-1:0] now;

  mcttu #(.FIFO_DEPTH(FIFO_DEPTH), .HOLDOFF(HOLDOFF)) u_mcttu (
    .clk      (clk),
    .rst_n    (rst_n),
    .pins     (sma_in),
    .test_clk (test_clk),
    .test_en  (cfg.test_en),
    .run      (cfg.run),
    .ch_en    (cfg.ch_en),
    .falling  (cfg.falling),
    .offset   (cfg.offset),
    .dead     (cfg.dead),
    .out_valid(tt_valid),
    .out_ready(tt_ready),
    .out_data (tt_data),
    .out_safe (tt_safe),
    .now      (now),
    .drop_fifo(drop_fifo),
    .drop_dead(drop_dead)
  );
  assign test_oe = cfg.test_en;

  // the sorted stream goes to both the CP and the protocol generator; a tag
  // leaves the MCTTU when both take it
  logic cp_in_ready, pg_tag_ready;
  assign tt_ready = cp_in_ready && pg_tag_ready;

  logic   cp_valid, cp_ready;
  coinc_t cp_data;

  coinc_processor u_cp (
    .clk       (clk),
    .rst_n     (rst_n),
    .window    (cfg.window),
    .threshold (cfg.threshold),
    .in_valid  (tt_valid && pg_tag_ready),
    .in_ready  (cp_in_ready),
    .in_data   (tt_data),
    .in_safe   (tt_safe),
    .out_valid (cp_valid),
    .out_ready (cp_ready),
    .out_data  (cp_data),
    .n_filtered(n_filtered)
  );

  pattern_trigger #(.PULSE_CYCLES(PULSE_CYCLES)) u_trig (
    .clk      (clk),
    .rst_n    (rst_n),
    .vec_valid(cp_valid && cp_ready),
    .vec      (cp_data.vec),
    .pattern  (cfg.pattern),
    .trig     (trig_out),
    .n_trig   ()
  );

  logic        pg_valid, pg_ready;
  logic [63:0] pg_word;

  protocol_gen u_pg (
    .clk          (clk),
    .rst_n        (rst_n),
    .run          (cfg.run),
    .mode         (cfg.mode),
    .status_period(cfg.status_period),
    .now          (now),
    .drop_count   (drop_fifo),
    .tag_valid    (tt_valid && cp_in_ready),
    .tag_ready    (pg_tag_ready),
    .tag_data     (tt_data),
    .coinc_valid  (cp_valid),
    .coinc_ready  (cp_ready),
    .coinc_data   (cp_data),
    .out_valid    (pg_valid),
    .out_ready    (pg_ready),
    .out_word     (pg_word),
    .n_status     ()
  );

  logic        cmd_valid, cmd_write;
  logic [15:0] cmd_addr;
  logic [31:0] cmd_data;
  logic        reg_valid, reg_ready;
  logic [15:0] reg_addr;
  logic [31:0] reg_data;

  usb_interface #(.DEPTH(USB_DEPTH)) u_usb (
    .clk          (clk),
    .rst_n        (rst_n),
    .in_valid     (pg_valid),
    .in_ready     (pg_ready),
    .in_word      (pg_word),
    .reg_valid    (reg_valid),
    .reg_ready    (reg_ready),
    .reg_addr     (reg_addr),
    .reg_data     (reg_data),
    .cmd_valid    (cmd_valid),
    .cmd_write    (cmd_write),
    .cmd_addr     (cmd_addr),
    .cmd_data     (cmd_data),
    .usb_dout     (usb_dout),
    .usb_wr       (usb_wr),
    .usb_full     (usb_full),
    .usb_din      (usb_din),
    .usb_din_valid(usb_din_valid),
    .n_words      ()
  );

  control_unit #(.STATUS_DEFAULT(STATUS_DEFAULT)) u_ctrl (
    .clk      (clk),
    .rst_n    (rst_n),
    .cmd_valid(cmd_valid),
    .cmd_write(cmd_write),
    .cmd_addr (cmd_addr),
    .cmd_data (cmd_data),
    .reg_valid(reg_valid),
    .reg_ready(reg_ready),
    .reg_addr (reg_addr),
    .reg_data (reg_data),
    .cfg      (cfg)
  );
endmodule
