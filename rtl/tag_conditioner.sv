// tag_conditioner -- per-channel programmable offset and optional dead-time
// filter of the multi-channel time-tagging unit.
//
// Stage 1 adds the channel's offset to each tag; it compensates cable and
// on-chip path differences between channels. The offset is unsigned (a
// common base can be added to all channels), which keeps every tag later
// than the edge that made it; the time sorter relies on that. Stage 2 is the
// dead-time filter: a tag closer than `dead` LSBs to the last tag it let
// through is dropped; dead = 0 turns the filter off. Hits are also dropped
// when the channel is disabled. The paper names the offset and the optional
// dead-time filter with programmable length; widths, units (tag LSBs),
// unsigned offset and "measured from the last accepted tag" are this
// design's choices.
//
// Interface: in_valid/in_tag from the TDC, out_valid/out_tag to the
// channel FIFO, drop_dead pulses for each tag the filter removes. No
// back-pressure; latency 2 cycles.
`timescale 1ps/1fs
module tag_conditioner
  import ttcd_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   enable,
  input  logic [OFFSET_BITS-1:0] offset,
  input  logic [DEAD_BITS-1:0]   dead,
  input  logic                   in_valid,
  input  tag_t                   in_tag,
  output logic                   out_valid,
  output tag_t                   out_tag,
  output logic                   drop_dead
);
  logic valid1;
  tag_t tag1;
  tag_t last_tag;
  logic have_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid1 <= 1'b0;
      tag1   <= '0;
    end else begin
      valid1 <= in_valid & enable;
      tag1   <= in_tag + TAG_BITS'(offset);
    end
  end

  logic inside_dead;
  assign inside_dead = have_last && (dead != '0) && ((tag1 - last_tag) < TAG_BITS'(dead));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
      drop_dead <= 1'b0;
      last_tag  <= '0;
      have_last <= 1'b0;
    end else begin
      out_valid <= valid1 & ~inside_dead;
      drop_dead <= valid1 & inside_dead;
      out_tag   <= tag1;
      if (valid1 && !inside_dead) begin
        last_tag  <= tag1;
        have_last <= 1'b1;
      end
    end
  end
endmodule
