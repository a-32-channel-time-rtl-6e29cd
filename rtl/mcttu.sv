// mcttu -- multi-channel time-tagging unit: turns the edges on N input
// pins into one time-sorted stream of time-tags with channel numbers.
//
// Each channel has a TDC (carry-chain delay lines, tdc_delay_line, sampled
// and encoded by tdc_encoder), a programmable offset and optional dead-time
// filter (tag_conditioner) and a FIFO (tag_fifo); a shared coarse counter
// of sampling-clock cycles gives the upper part of every tag, and the time
// sorter (tag_sorter) merges the FIFOs. With test_en set, every channel
// sees the test clock instead of its pin: this stands for the pins being
// switched to bidirectional mode and driven with the 2 MHz test pattern,
// so the whole input path is measured. Hits are only recorded while `run`
// is set and the channel is enabled. The paper gives this structure; the
// widths, the FIFO depth and the sorter's release rule are this design's.
//
// Interface: pins, test_clk, configuration, out_valid/out_ready/out_data
// (chan_tag_t), out_safe, now (coarse time), drop_fifo (tags lost to full
// FIFOs) and drop_dead (tags removed by the dead-time filters). An edge
// appears at the output about HOLDOFF cycles after it was captured.
`timescale 1ps/1fs
module mcttu
  import ttcd_pkg::*;
#(
  parameter int unsigned N          = N_CH,
  parameter int unsigned N_CHAINS   = 8,
  parameter int unsigned TAPS       = 32,
  parameter int unsigned FIFO_DEPTH = 512,
  parameter int unsigned HOLDOFF    = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [N-1:0]               pins,
  input  logic                       test_clk,
  input  logic                       test_en,
  input  logic                       run,
  input  logic [N-1:0]               ch_en,
  input  logic [N-1:0]               falling,
  input  logic [N-1:0][OFFSET_BITS-1:0] offset,
  input  logic [N-1:0][DEAD_BITS-1:0]   dead,
  output logic                       out_valid,
  input  logic                       out_ready,
  output chan_tag_t                  out_data,
  output tag_t                       out_safe,
  output logic [COARSE_BITS-1:0]     now,
  output logic [31:0]                drop_fifo,
  output logic [31:0]                drop_dead
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) now <= '0;
    else        now <= now + 1'b1;
  end

  logic [N-1:0] fifo_ovf, dead_drop, head_valid, pop;
  tag_t [N-1:0] head_tag;

  for (genvar c = 0; c < N; c++) begin : g_ch
    logic                          sig;
    logic [N_CHAINS-1:0][TAPS-1:0] taps;
    logic                          hit_valid, cond_valid;
    tag_t                          hit_tag, cond_tag;

    assign sig = test_en ? test_clk : pins[c];

    tdc_delay_line #(.N_CHAINS(N_CHAINS), .TAPS(TAPS)) u_line (
      .sig (sig),
      .taps(taps)
    );

    tdc_encoder #(.N_CHAINS(N_CHAINS), .TAPS(TAPS)) u_enc (
      .clk      (clk),
      .rst_n    (rst_n),
      .taps     (taps),
      .coarse   (now),
      .falling  (falling[c]),
      .hit_valid(hit_valid),
      .hit_tag  (hit_tag)
    );

    tag_conditioner u_cond (
      .clk      (clk),
      .rst_n    (rst_n),
      .enable   (run && ch_en[c]),
      .offset   (offset[c]),
      .dead     (dead[c]),
      .in_valid (hit_valid),
      .in_tag   (hit_tag),
      .out_valid(cond_valid),
      .out_tag  (cond_tag),
      .drop_dead(dead_drop[c])
    );

    tag_fifo #(.WIDTH(TAG_BITS), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk       (clk),
      .rst_n     (rst_n),
      .wr        (cond_valid),
      .din       (cond_tag),
      .overflow  (fifo_ovf[c]),
      .head_valid(head_valid[c]),
      .head_data (head_tag[c]),
      .pop       (pop[c])
    );
  end

  tag_sorter #(.N(N), .HOLDOFF(HOLDOFF)) u_sort (
    .clk       (clk),
    .rst_n     (rst_n),
    .now       (now),
    .head_valid(head_valid),
    .head_tag  (head_tag),
    .pop       (pop),
    .out_valid (out_valid),
    .out_ready (out_ready),
    .out_data  (out_data),
    .out_safe  (out_safe)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      drop_fifo <= '0;
      drop_dead <= '0;
    end else begin
      drop_fifo <= drop_fifo + 32'($countones(fifo_ovf));
      drop_dead <= drop_dead + 32'($countones(dead_drop));
    end
  end
endmodule
