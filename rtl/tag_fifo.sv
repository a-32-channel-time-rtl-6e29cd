// tag_fifo -- first-word-fall-through FIFO for the time-tags of one channel.
//
// Tags are written into a synchronous-read memory (one block RAM per
// channel in the FPGA) and the oldest one is prefetched into a head
// register, so the time sorter can look at head_valid/head_data of every
// channel at once and pop the one it takes. A write to a full FIFO is
// dropped and reported on `overflow`. The paper gives only "a FIFO buffer
// for temporary time-tag storage" per channel; depth, prefetch and the
// drop-on-full policy are this design's.
//
// Interface: wr/din in, head_valid/head_data/pop out. Capacity DEPTH+1
// entries; a tag written into an empty FIFO reaches the head 2 cycles later.
// One pop per cycle keeps the head full while the memory holds data.
`timescale 1ps/1fs
module tag_fifo #(
  parameter int unsigned WIDTH = 55,
  parameter int unsigned DEPTH = 512
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr,
  input  logic [WIDTH-1:0] din,
  output logic             overflow,
  output logic             head_valid,
  output logic [WIDTH-1:0] head_data,
  input  logic             pop
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic [AW:0]      count;           // entries in mem, head excluded
  logic             full, do_wr, do_rd;

  assign full     = (count == (AW+1)'(DEPTH));
  assign do_wr    = wr && !full;
  assign do_rd    = (count != '0) && (!head_valid || pop);
  assign overflow = wr && full;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= din;
    if (do_rd) head_data <= mem[rptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr       <= '0;
      rptr       <= '0;
      count      <= '0;
      head_valid <= 1'b0;
    end else begin
      if (do_wr) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (do_rd) rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
      if (do_rd)    head_valid <= 1'b1;
      else if (pop) head_valid <= 1'b0;
    end
  end

  // a pop is only legal while the head holds a tag
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> head_valid);
endmodule
