// protocol_gen -- formats the readout stream and injects periodic status.
//
// Depending on the run mode the generator takes its data from the MCTTU
// (time-tagging mode: one W_TAG word per time-tag, channel and tag) or from
// the coincidence processor (coincidence mode: one W_COINC word per vector;
// coincidence mode with time-tags: a W_COINC_TS word followed by a W_TIME
// word holding the tag). The stream it does not send is still accepted and
// discarded, so neither source can stall the other. While `run` is set and
// status_period is not zero, a W_STATUS word with the current coarse time
// and the number of tags lost to full FIFOs is sent every status_period
// cycles, ahead of data. The paper gives the source selection by run mode
// and the periodic status words; the 64-bit word layout (ttcd_pkg) is this
// design's. The paper's host software decompresses the stream, but the
// compression is not described, so words are sent uncompressed.
//
// Interface: tag_* and coinc_* valid/ready inputs, out_valid/out_ready/
// out_word output. One word per cycle; a coincidence with time-tag takes two.
`timescale 1ps/1fs
module protocol_gen
  import ttcd_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   run,
  input  run_mode_e              mode,
  input  logic [31:0]            status_period,
  input  logic [COARSE_BITS-1:0] now,
  input  logic [31:0]            drop_count,
  input  logic                   tag_valid,
  output logic                   tag_ready,
  input  chan_tag_t              tag_data,
  input  logic                   coinc_valid,
  output logic                   coinc_ready,
  input  coinc_t                 coinc_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [63:0]            out_word,
  output logic [31:0]            n_status
);
  logic [31:0] timer;
  logic        status_pend;
  logic        time_pend;     // second word of a coincidence with time-tag
  tag_t        time_tag;
  logic        slot_free;

  assign slot_free = !out_valid || out_ready;

  logic send_status, send_time, send_tag, send_coinc;
  always_comb begin
    send_status = slot_free && status_pend && !time_pend;
    send_time   = slot_free && time_pend;
    send_tag    = slot_free && !status_pend && !time_pend && (mode == MODE_TIMETAG) && tag_valid;
    send_coinc  = slot_free && !status_pend && !time_pend && (mode != MODE_TIMETAG) && coinc_valid;
    tag_ready   = (mode == MODE_TIMETAG) ? send_tag : 1'b1;
    coinc_ready = (mode == MODE_TIMETAG) ? 1'b1 : send_coinc;
  end

  logic [12:0] drop_sat;
  assign drop_sat = (drop_count > 32'h1FFF) ? 13'h1FFF : drop_count[12:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      timer       <= '0;
      status_pend <= 1'b0;
      time_pend   <= 1'b0;
      time_tag    <= '0;
      out_valid   <= 1'b0;
      out_word    <= '0;
      n_status    <= '0;
    end else begin
      if (out_ready) out_valid <= 1'b0;

      if (send_status) begin
        out_valid   <= 1'b1;
        out_word    <= {W_STATUS, drop_sat, now};
        status_pend <= 1'b0;
        n_status    <= n_status + 1;
      end else if (send_time) begin
        out_valid <= 1'b1;
        out_word  <= {W_TIME, 5'd0, time_tag};
        time_pend <= 1'b0;
      end else if (send_tag) begin
        out_valid <= 1'b1;
        out_word  <= {W_TAG, tag_data.ch, tag_data.tag};
      end else if (send_coinc) begin
        out_valid <= 1'b1;
        if (mode == MODE_COINC_TS) begin
          out_word  <= {W_COINC_TS, 28'd0, coinc_data.vec};
          time_pend <= 1'b1;
          time_tag  <= coinc_data.tag;
        end else begin
          out_word  <= {W_COINC, 28'd0, coinc_data.vec};
        end
      end

      // a period that ends while a status word is still pending merges with it
      if (run && status_period != '0) begin
        if (timer >= status_period - 1) begin
          timer       <= '0;
          status_pend <= 1'b1;
        end else begin
          timer <= timer + 1;
        end
      end else begin
        timer <= '0;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_word));
endmodule
