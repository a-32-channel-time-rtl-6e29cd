// tdc_encoder -- turns the sampled carry-chain taps of one channel into
// time-tags.
//
// Every cycle of the 440 MHz sampling clock the taps of all delay chains are
// captured (stage 1) and registered once more against metastability
// (stage 2). With `falling` set, the taps are inverted so that a falling
// edge of the input looks like a rising one. An edge is detected when the
// first tap of chain 0 goes from 0 to 1 between two samples. In that sample
// the number of ones in every chain tells how far the edge has run since it
// arrived; the counts of all chains are added (a ones-counter, which is
// immune to bubbles in the thermometer code) into S = 1..256. The tag is
//   tag = {coarse, 8'b0} - S + 1
// where coarse is the coarse-counter value at the capturing clock edge, so
// the tag is the edge time rounded up to the next 1/256 of a period.
// The paper gives the carry-chain TDC, the eight averaged chains, the 256
// effective taps, the 440 MHz sampling and the rising/falling choice; the
// detection rule, the ones-counter and the tag formula are this design's.
//
// Interface: taps (asynchronous, from tdc_delay_line), coarse (free-running
// counter), falling (edge select), hit_valid/hit_tag (one-cycle strobe).
// Latency: hit_valid rises 4 clock cycles after the capturing edge. Pulses
// must stay high (or low) for more than one sampling period, and two edges
// of the chosen polarity must be at least two periods apart.
`timescale 1ps/1fs
module tdc_encoder
  import ttcd_pkg::*;
#(
  parameter int unsigned N_CHAINS = 8,
  parameter int unsigned TAPS     = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [N_CHAINS-1:0][TAPS-1:0] taps,
  input  logic [COARSE_BITS-1:0]        coarse,
  input  logic                          falling,
  output logic                          hit_valid,
  output tag_t                          hit_tag
);
  localparam int unsigned CNT_BITS = $clog2(TAPS + 1);
  localparam int unsigned SUM_BITS = $clog2(N_CHAINS * TAPS + 1);

  logic [N_CHAINS-1:0][TAPS-1:0] samp1, samp2;
  logic [COARSE_BITS-1:0]        coarse1, coarse2, coarse3;
  logic                          first_prev;
  logic                          edge3;
  logic [N_CHAINS-1:0][CNT_BITS-1:0] cnt3;

  // stage 1: capture, stage 2: re-register and select polarity
  always_ff @(posedge clk) begin
    samp1   <= taps;
    samp2   <= falling ? ~samp1 : samp1;
    coarse1 <= coarse;
    coarse2 <= coarse1;
  end

  // stage 3: edge detection and per-chain ones count
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first_prev <= 1'b1;
      edge3      <= 1'b0;
    end else begin
      first_prev <= samp2[0][0];
      edge3      <= samp2[0][0] & ~first_prev;
    end
  end

  always_ff @(posedge clk) begin
    coarse3 <= coarse2;
    for (int k = 0; k < N_CHAINS; k++) cnt3[k] <= CNT_BITS'($countones(samp2[k]));
  end

  // stage 4: sum of the chains and tag
  logic [SUM_BITS-1:0] sum;
  always_comb begin
    sum = '0;
    for (int k = 0; k < N_CHAINS; k++) sum += SUM_BITS'(cnt3[k]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hit_valid <= 1'b0;
      hit_tag   <= '0;
    end else begin
      hit_valid <= edge3;
      hit_tag   <= {coarse3, {FINE_BITS{1'b0}}} - TAG_BITS'(sum) + TAG_BITS'(1);
    end
  end
endmodule
