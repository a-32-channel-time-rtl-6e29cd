// coinc_processor -- combines the time-sorted stream of time-tags into
// coincidence vectors and filters them by the number of channels hit.
//
// The first tag that arrives while no window is open opens one: its tag is
// the window's start and its channel sets one bit of a 32-bit vector. Every
// further tag no later than start + window sets its channel's bit. The
// window closes when a later tag arrives (that tag opens the next window)
// or when the sorter reports that nothing earlier than start + window can
// come any more (in_safe), so a vector never waits for the next hit. The
// event filter then drops a vector with fewer bits set than `threshold`;
// the others leave with their start tag. The window is given in tag LSBs
// (about 8.9 ps) and limited to WINDOW_MAX = 2.5 us. The paper gives the
// programmable window, its 8 ps step and 2.5 us limit, and the threshold
// filter; the "window opened by the first hit" rule is this design's.
//
// Interface: in_valid/in_ready/in_data (chan_tag_t) and in_safe from the
// sorter; out_valid/out_ready/out_data (coinc_t) to pattern trigger and
// readout; n_filtered counts vectors removed by the filter. One tag per
// cycle; in_ready drops only while a closing vector waits for the output.
`timescale 1ps/1fs
module coinc_processor
  import ttcd_pkg::*;
#(
  parameter int unsigned N = N_CH
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [WINDOW_BITS-1:0] window,
  input  logic [THRESH_BITS-1:0] threshold,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  chan_tag_t              in_data,
  input  tag_t                   in_safe,
  output logic                   out_valid,
  input  logic                   out_ready,
  output coinc_t                 out_data,
  output logic [31:0]            n_filtered
);
  logic         open;
  tag_t         start;
  logic [N-1:0] vec;

  logic [WINDOW_BITS-1:0] win;
  assign win = (window > WINDOW_BITS'(WINDOW_MAX)) ? WINDOW_BITS'(WINDOW_MAX) : window;

  tag_t in_dt, safe_dt;
  assign in_dt   = in_data.tag - start;
  assign safe_dt = in_safe - start;

  logic in_inside, expired, slot_free, close, pass;
  assign in_inside = in_dt <= TAG_BITS'(win);
  // in_safe is past the window end: start + win < in_safe
  assign expired   = !safe_dt[TAG_BITS-1] && (safe_dt > TAG_BITS'(win));
  assign slot_free = !out_valid || out_ready;
  assign close     = open && ((in_valid && !in_inside) || (!in_valid && expired));
  assign pass      = $countones(vec) >= int'(threshold);
  assign in_ready  = !(open && !in_inside) || slot_free;

  logic [N-1:0] in_bit;
  always_comb begin
    in_bit = '0;
    in_bit[in_data.ch] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open       <= 1'b0;
      start      <= '0;
      vec        <= '0;
      out_valid  <= 1'b0;
      out_data   <= '0;
      n_filtered <= '0;
    end else begin
      if (out_ready) out_valid <= 1'b0;
      if (close && slot_free) begin
        if (pass) begin
          out_valid     <= 1'b1;
          out_data.vec  <= N_CH'(vec);
          out_data.tag  <= start;
        end else begin
          n_filtered <= n_filtered + 1;
        end
        open <= 1'b0;
      end
      if (in_valid && in_ready) begin
        if (open && in_inside) begin
          vec <= vec | in_bit;
        end else begin
          open  <= 1'b1;
          start <= in_data.tag;
          vec   <= in_bit;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
