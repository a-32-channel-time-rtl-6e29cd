// tag_sorter -- merges the per-channel FIFOs into one time-sorted stream of
// time-tags, each bundled with its channel number.
//
// Every cycle the heads of all channel FIFOs are compared and the earliest
// tag is found (ties go to the lower channel). It may only be sent once no
// tag that is still on its way through a TDC pipeline can be earlier. Tags
// are never earlier than the edge that made them (offsets are unsigned), and
// an edge captured now reaches a FIFO head within HOLDOFF cycles, so every
// tag still to come is at least `horizon` = (now - HOLDOFF) x 256. The
// earliest head is released when it lies before the horizon. Comparisons
// use the sign of the difference, so the 55-bit time may wrap. The paper
// states only that the MCTTU sends a time-sorted stream with channel
// numbers; the horizon rule is this design's way of guaranteeing the order.
//
// Interface: head_valid/head_tag/pop to the FIFOs; out_valid/out_ready/
// out_data (chan_tag_t) downstream; out_safe is a time before which the
// stream is complete (used to close coincidence windows). Throughput one tag
// per cycle; latency about HOLDOFF cycles. The minimum search is one
// combinational chain over all channels.
`timescale 1ps/1fs
module tag_sorter
  import ttcd_pkg::*;
#(
  parameter int unsigned N       = N_CH,
  parameter int unsigned HOLDOFF = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [COARSE_BITS-1:0] now,
  input  logic [N-1:0]           head_valid,
  input  tag_t [N-1:0]           head_tag,
  output logic [N-1:0]           pop,
  output logic                   out_valid,
  input  logic                   out_ready,
  output chan_tag_t              out_data,
  output tag_t                   out_safe
);
  function automatic logic earlier(tag_t a, tag_t b);
    tag_t d;
    d = a - b;
    return d[TAG_BITS-1];
  endfunction

  tag_t                 horizon;
  logic                 best_valid;
  logic [$clog2(N)-1:0] best_idx;
  tag_t                 best_tag;

  assign horizon = {now - COARSE_BITS'(HOLDOFF), {FINE_BITS{1'b0}}};

  always_comb begin
    best_valid = 1'b0;
    best_idx   = '0;
    best_tag   = '0;
    for (int i = 0; i < N; i++) begin
      if (head_valid[i] && (!best_valid || earlier(head_tag[i], best_tag))) begin
        best_valid = 1'b1;
        best_idx   = ($clog2(N))'(i);
        best_tag   = head_tag[i];
      end
    end
  end

  logic take;
  assign take = best_valid && earlier(best_tag, horizon) && (!out_valid || out_ready);

  always_comb begin
    pop = '0;
    pop[best_idx] = take;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_safe  <= '0;
    end else begin
      if (take) begin
        out_valid   <= 1'b1;
        out_data.ch <= CH_BITS'(best_idx);
        out_data.tag <= best_tag;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
      out_safe <= (best_valid && earlier(best_tag, horizon)) ? best_tag : horizon;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
