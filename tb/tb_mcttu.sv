// tb_mcttu -- the whole time-tagging unit at its default size (32 channels,
// 8 x 32 taps, 512-deep FIFOs). Edges are placed on the pins at known
// fractions of the sampling period; each must come out once, with its
// channel and tag = edge time rounded up to 1/256 period plus the channel's
// offset, and the stream must be in time order. Further phases check the
// dead-time filter, disabled channels, the test-pattern mode (every channel
// sees the same edge) and FIFO overflow under a stalled output.
`timescale 1ps/1fs
module tb_mcttu;
  import ttcd_pkg::*;
  localparam real T   = 2272.727;
  localparam real LSB = T / 256.0;
  localparam int  N   = 32;

  logic clk = 0, rst_n = 0, test_clk = 0, test_en = 0, run = 0;
  logic [N-1:0] pins = '0, ch_en = '1, falling = '0;
  logic [N-1:0][OFFSET_BITS-1:0] offset = '0;
  logic [N-1:0][DEAD_BITS-1:0] dead = '0;
  logic out_valid, out_ready = 1;
  chan_tag_t out_data;
  tag_t out_safe;
  logic [COARSE_BITS-1:0] now;
  logic [31:0] drop_fifo, drop_dead;
  int checks = 0, failures = 0, n_out = 0, n_exp = 0;

  always #(T / 2) clk = ~clk;

  mcttu dut (.clk, .rst_n, .pins, .test_clk, .test_en, .run, .ch_en, .falling, .offset, .dead,
             .out_valid, .out_ready, .out_data, .out_safe, .now, .drop_fifo, .drop_dead);

  int   expected[longint];
  tag_t last_tag;
  bit   have_last = 0;
  bit   count_only = 0;   // overflow phase: which tags survive is not modelled

  function automatic bit is_earlier(tag_t a, tag_t b);
    tag_t d;
    d = a - b;
    return d[TAG_BITS-1];
  endfunction

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      longint key;
      n_out++;
      checks += 2;
      key = longint'(out_data.tag) * 32 + out_data.ch;
      if (count_only) checks--;
      else if (!expected.exists(key)) begin
        failures++; $display("unexpected tag %0d on channel %0d", out_data.tag, out_data.ch);
      end else if (--expected[key] == 0) expected.delete(key);
      if (have_last && is_earlier(out_data.tag, last_tag)) begin
        failures++; $display("out of order: %0d after %0d", out_data.tag, last_tag);
      end
      last_tag = out_data.tag;
      have_last = 1;
    end
  end

  function automatic void expect_tag(int ch, tag_t t);
    longint key;
    key = longint'(t) * 32 + ch;
    if (expected.exists(key)) expected[key]++;
    else expected[key] = 1;
    n_exp++;
  endfunction

  // a pulse on channel ch whose rising edge lies j + 0.5 steps after the
  // current clock edge; called right at a posedge
  task automatic pulse(int ch, int j, bit expect_it);
    logic [COARSE_BITS-1:0] n0;
    n0 = now;   // value the encoder samples at this edge
    if (expect_it) expect_tag(ch, TAG_BITS'(n0) * 256 + TAG_BITS'(j + 1) + TAG_BITS'(offset[ch]));
    fork
      begin
        #((j + 0.5) * LSB);
        pins[ch] = 1'b1;
        #(1.5 * T);
        pins[ch] = 1'b0;
      end
    join_none
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int base;
    for (int c = 0; c < N; c++) offset[c] = OFFSET_BITS'($urandom_range(0, 5000));
    repeat (3) @(posedge clk);
    rst_n = 1;
    run = 1;
    repeat (20) @(posedge clk);

    // 1: random edges on random channels, random back-pressure
    for (int s = 0; s < 300; s++) begin
      @(posedge clk);
      for (int c = 0; c < N; c++)
        if ($urandom_range(0, 99) < 15) pulse(c, $urandom_range(0, 255), 1);
      out_ready <= ($urandom_range(0, 4) != 0);
      repeat (3) @(posedge clk);
    end
    out_ready <= 1;
    // about 1.2 tags per cycle were offered against 0.8 taken: drain
    repeat (1500) @(posedge clk);
    checks++;
    if (expected.num() != 0) begin failures++; $display("phase 1: %0d tags missing", expected.num()); end

    // 2: dead time of 3000 steps (about 12 periods) on channel 3,
    //    channel 4 disabled; pulses every 5 periods
    offset = '0;
    dead[3] = DEAD_BITS'(3000);
    ch_en[4] = 1'b0;
    repeat (5) @(posedge clk);
    for (int s = 0; s < 24; s++) begin
      @(posedge clk);
      pulse(3, 10, (s % 3) == 0);
      pulse(4, 10, 0);
      pulse(5, 20, 1);
      repeat (3) @(posedge clk);
    end
    repeat (200) @(posedge clk);
    checks += 2;
    if (expected.num() != 0) begin failures++; $display("phase 2: %0d tags missing", expected.num()); end
    if (drop_dead != 16) begin failures++; $display("dead-time drops %0d, expected 16", drop_dead); end
    dead[3] = '0;
    ch_en[4] = 1'b1;

    // 3: test pattern: every channel sees the test clock
    test_en = 1;
    repeat (5) @(posedge clk);
    for (int s = 0; s < 4; s++) begin
      @(posedge clk);
      for (int c = 0; c < N; c++) expect_tag(c, TAG_BITS'(now) * 256 + TAG_BITS'(100 + 1));
      fork
        begin
          #(100.5 * LSB) test_clk = 1;
          #(4 * T) test_clk = 0;
        end
      join_none
      repeat (10) @(posedge clk);
    end
    repeat (200) @(posedge clk);
    test_en = 0;
    checks++;
    if (expected.num() != 0) begin failures++; $display("phase 3: %0d tags missing", expected.num()); end

    // 4: stalled output, 600 pulses on channel 7: the FIFO overflows
    base = n_out;
    count_only = 1;
    @(posedge clk) out_ready <= 0;
    for (int s = 0; s < 600; s++) begin
      @(posedge clk);
      pulse(7, 50, 0);
      repeat (2) @(posedge clk);
    end
    repeat (20) @(posedge clk);
    out_ready <= 1;
    repeat (800) @(posedge clk);
    checks += 2;
    if (drop_fifo == 0) begin failures++; $display("no overflow"); end
    if (n_out - base + int'(drop_fifo) != 600) begin
      failures++; $display("phase 4: %0d out + %0d dropped != 600", n_out - base, drop_fifo);
    end
    $display("tags out %0d, expected %0d (+%0d in overflow phase), fifo drops %0d",
             n_out, n_exp, 600, drop_fifo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
