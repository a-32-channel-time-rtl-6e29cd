// usb_interface -- FPGA side of the USB-3 link: buffers the readout stream
// and moves it to an external USB-3 bridge chip over a 32-bit synchronous
// FIFO-style bus, and turns host command words into register accesses.
//
// Upstream, 64-bit words from the protocol generator and register read
// replies from the control unit (formatted as W_REG words, and given
// priority) enter one FIFO of DEPTH words. Each word leaves as two 32-bit
// transfers, upper half first, one per cycle while the bridge does not
// assert usb_full. Downstream, the host sends pairs of 32-bit words: a
// command word ([31] 1 = write, 0 = read; [15:0] register address) and a
// data word; each pair becomes one cmd_* access. The paper only names the
// USB-3.0 SuperSpeed interface and shows it linked to the control unit, the
// protocol generator and the logic analyzer; the bus, the word split and
// the command format are this design's, and the bridge and its PHY are
// outside the FPGA.
//
// Interface: in_valid/in_ready/in_word, reg_valid/reg_ready/reg_addr/
// reg_data, cmd_valid/cmd_write/cmd_addr/cmd_data, usb_dout/usb_wr/usb_full,
// usb_din/usb_din_valid. Peak upstream rate: one 32-bit transfer per cycle.
`timescale 1ps/1fs
module usb_interface
  import ttcd_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  // readout stream
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [63:0] in_word,
  // register read replies
  input  logic        reg_valid,
  output logic        reg_ready,
  input  logic [15:0] reg_addr,
  input  logic [31:0] reg_data,
  // register accesses
  output logic        cmd_valid,
  output logic        cmd_write,
  output logic [15:0] cmd_addr,
  output logic [31:0] cmd_data,
  // bus to the USB-3 bridge
  output logic [31:0] usb_dout,
  output logic        usb_wr,
  input  logic        usb_full,
  input  logic [31:0] usb_din,
  input  logic        usb_din_valid,
  output logic [31:0] n_words
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [63:0] mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic [AW:0]   count;
  logic          full, wr_en, rd_en;
  logic [63:0]   wr_word;

  // word being sent, and whether its upper half has gone
  logic [63:0] cur;
  logic        cur_valid, cur_hi_sent;

  assign full      = (count == (AW+1)'(DEPTH));
  assign reg_ready = !full;
  assign in_ready  = !full && !reg_valid;
  assign wr_en     = !full && (reg_valid || in_valid);
  assign wr_word   = reg_valid ? {W_REG, 12'd0, reg_addr, reg_data} : in_word;

  logic send_lo;
  assign send_lo = cur_valid && cur_hi_sent && !usb_full;
  assign rd_en   = (count != '0) && (!cur_valid || send_lo);

  always_ff @(posedge clk) begin
    if (wr_en) mem[wptr] <= wr_word;
    if (rd_en) cur <= mem[rptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr        <= '0;
      rptr        <= '0;
      count       <= '0;
      cur_valid   <= 1'b0;
      cur_hi_sent <= 1'b0;
      usb_wr      <= 1'b0;
      usb_dout    <= '0;
      n_words     <= '0;
    end else begin
      if (wr_en) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (rd_en) rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + (AW+1)'(wr_en) - (AW+1)'(rd_en);

      usb_wr <= 1'b0;
      if (cur_valid && !usb_full) begin
        usb_wr   <= 1'b1;
        usb_dout <= cur_hi_sent ? cur[31:0] : cur[63:32];
        cur_hi_sent <= !cur_hi_sent;
        if (cur_hi_sent) n_words <= n_words + 1;
      end
      if (rd_en)        cur_valid <= 1'b1;
      else if (send_lo) cur_valid <= 1'b0;
    end
  end

  // host command words: command, then data
  logic        have_cmd;
  logic [31:0] cmd_word;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_cmd  <= 1'b0;
      cmd_word  <= '0;
      cmd_valid <= 1'b0;
      cmd_write <= 1'b0;
      cmd_addr  <= '0;
      cmd_data  <= '0;
    end else begin
      cmd_valid <= 1'b0;
      if (usb_din_valid) begin
        if (!have_cmd) begin
          cmd_word <= usb_din;
          have_cmd <= 1'b1;
        end else begin
          cmd_valid <= 1'b1;
          cmd_write <= cmd_word[31];
          cmd_addr  <= cmd_word[15:0];
          cmd_data  <= usb_din;
          have_cmd  <= 1'b0;
        end
      end
    end
  end
endmodule
