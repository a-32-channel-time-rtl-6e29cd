// tb_ttcd_top -- end-to-end test of the whole unit at its default size.
// A host model programs the unit over the USB bus, places edges on the 32
// inputs at known fractions of the 440 MHz period, and decodes the 32-bit
// bus back into 64-bit words. Every phase is checked against a reference
// model of the tags and of the coincidence rule:
//   1 time-tagging mode with random offsets and one falling-edge channel,
//     under random usb_full back-pressure;
//   2 coincidence mode with time-tags, window 300 steps, threshold 2: the
//     vectors and their tags, the filtered count and the trigger pulses of
//     two pattern registers;
//   3 coincidence mode without time-tags, with a dead time on one channel;
//   4 test-pattern mode: each test-clock edge gives an all-ones vector;
//   5 overflow: the bridge holds usb_full, the stream backs up through the
//     whole chain into the channel FIFOs, which drop tags.
// Status words and a register read-back are checked throughout. Each
// mechanism is counted and one that never happened is a failure.
`timescale 1ps/1fs
module tb_ttcd_top;
  import ttcd_pkg::*;
  localparam real T   = 2272.727;
  localparam real LSB = T / 256.0;
  localparam int  N   = 32;

  logic clk = 0, rst_n = 0, test_clk = 0, test_oe;
  logic [N-1:0] sma_in = '0;
  logic [7:0] trig_out;
  logic [31:0] usb_dout, usb_din = '0, drop_fifo, drop_dead, n_filtered;
  logic usb_wr, usb_full = 0, usb_din_valid = 0;
  int checks = 0, failures = 0;

  always #(T / 2) clk = ~clk;

  ttcd_top dut (.clk, .rst_n, .sma_in, .test_clk, .test_oe, .trig_out, .usb_dout, .usb_wr,
                .usb_full, .usb_din, .usb_din_valid, .drop_fifo, .drop_dead, .n_filtered);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- host side of the bus ----------------
  logic [63:0] rx_data[$];      // data words (tags, vectors, times)
  logic [63:0] rx_reg[$];
  int   n_status = 0, n_stall = 0, n_trig_edges[8];
  logic [46:0] last_status_time;
  bit   have_status = 0;
  logic [31:0] hi;
  bit   have_hi = 0;
  logic [7:0] trig_d = '0;
  logic [63:0] w;

  always @(posedge clk) if (rst_n) begin
    if (usb_wr) begin
      if (!have_hi) begin hi = usb_dout; have_hi = 1; end
      else begin
        have_hi = 0;
        w = {hi, usb_dout};
        case (w[63:60])
          W_STATUS: begin
            n_status++;
            if (have_status) check(w[46:0] > last_status_time, "status time advances");
            last_status_time = w[46:0];
            have_status = 1;
          end
          W_REG:   rx_reg.push_back(w);
          default: rx_data.push_back(w);
        endcase
      end
    end
    if (usb_full && dut.u_usb.cur_valid) n_stall++;
    for (int p = 0; p < 8; p++) if (trig_out[p] && !trig_d[p]) n_trig_edges[p]++;
    trig_d <= trig_out;
  end

  task automatic host_write(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk) begin usb_din_valid = 1; usb_din = {1'b1, 15'd0, a}; end
    @(negedge clk) usb_din = d;
    @(negedge clk) usb_din_valid = 0;
  endtask

  task automatic host_read(input logic [15:0] a, input logic [31:0] expv);
    @(negedge clk) begin usb_din_valid = 1; usb_din = {16'd0, a}; end
    @(negedge clk) usb_din = '0;
    @(negedge clk) usb_din_valid = 0;
    repeat (30) @(negedge clk);
    check(rx_reg.size() == 1 && rx_reg[0] == {W_REG, 12'd0, a, expv}, "register read-back");
    rx_reg.delete();
  endtask

  // ---------------- stimulus and reference ----------------
  logic [N-1:0][OFFSET_BITS-1:0] offs = '0;
  longint exp_keys[$];          // tag * 32 + channel of every expected hit

  // an edge on channel ch, j + 0.5 steps after the current clock edge;
  // call right at a posedge
  task automatic pulse(int ch, int j, bit fall, bit expect_it);
    tag_t t;
    t = TAG_BITS'(dut.u_mcttu.now) * 256 + TAG_BITS'(j + 1) + TAG_BITS'(offs[ch]);
    if (expect_it) exp_keys.push_back(longint'(t) * 32 + ch);
    fork
      begin
        #((j + 0.5) * LSB);
        sma_in[ch] = !fall;
        #(1.5 * T);
        sma_in[ch] = fall;
      end
    join_none
  endtask

  // coincidence reference: sorted keys -> expected words
  int exp_filtered;
  int exp_match[8];
  logic [N-1:0] pat[8];

  function automatic void expected_vectors(input int win, input int thr, input bit with_ts,
                                           ref logic [63:0] q[$]);
    logic [N-1:0] v;
    tag_t s, t;
    bit open;
    open = 0;
    exp_keys.sort();
    for (int i = 0; i <= exp_keys.size(); i++) begin
      if (i < exp_keys.size()) t = TAG_BITS'(exp_keys[i] >> 5);
      if (open && (i == exp_keys.size() || t - s > TAG_BITS'(win))) begin
        if ($countones(v) >= thr) begin
          q.push_back({with_ts ? W_COINC_TS : W_COINC, 28'd0, v});
          if (with_ts) q.push_back({W_TIME, 5'd0, s});
          for (int p = 0; p < 8; p++) if (v == pat[p]) exp_match[p]++;
        end else exp_filtered++;
        open = 0;
      end
      if (i < exp_keys.size()) begin
        if (!open) begin open = 1; s = t; v = '0; end
        v[exp_keys[i][4:0]] = 1'b1;
      end
    end
    exp_keys.delete();
  endfunction

  task automatic compare(input string phase, ref logic [63:0] q[$]);
    int bad;
    bad = 0;
    check(rx_data.size() == q.size(), $sformatf("%s: %0d words, expected %0d", phase, rx_data.size(), q.size()));
    for (int i = 0; i < q.size() && i < rx_data.size(); i++) begin
      checks++;
      if (rx_data[i] != q[i]) begin
        failures++;
        if (bad++ < 5) $display("%s word %0d: %h expected %h", phase, i, rx_data[i], q[i]);
      end
    end
    rx_data.delete();
    q.delete();
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] q[$];
    int filt0, dead_chan_hits;
    for (int p = 0; p < 8; p++) begin n_trig_edges[p] = 0; exp_match[p] = 0; pat[p] = '0; end
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    host_write(REG_STATUS_P, 32'd3000);
    host_read(REG_STATUS_P, 32'd3000);
    for (int c = 0; c < N; c++) begin
      offs[c] = OFFSET_BITS'($urandom_range(0, 2000));
      host_write(REG_OFFSET + 16'(c), 32'(offs[c]));
    end
    host_write(REG_FALLING, 32'h0000_0400);          // channel 10 on falling edges
    sma_in[10] = 1'b1;
    repeat (10) @(posedge clk);

    // ---- 1: time-tagging mode ----
    host_write(REG_CTRL, {28'd0, MODE_TIMETAG, 1'b0, 1'b1});
    repeat (20) @(posedge clk);
    for (int s = 0; s < 250; s++) begin
      @(posedge clk);
      for (int c = 0; c < N; c++)
        if ($urandom_range(0, 99) < 8) pulse(c, $urandom_range(0, 255), c == 10, 1);
      usb_full <= ($urandom_range(0, 3) == 0);
      repeat (3) @(posedge clk);
    end
    usb_full <= 0;
    repeat (3000) @(posedge clk);
    exp_keys.sort();
    foreach (exp_keys[i]) q.push_back({W_TAG, exp_keys[i][4:0], TAG_BITS'(exp_keys[i] >> 5)});
    exp_keys.delete();
    compare("time-tagging", q);
    host_read(REG_CTRL, {28'd0, MODE_TIMETAG, 1'b0, 1'b1});

    // ---- 2: coincidence mode with time-tags ----
    host_write(REG_CTRL, 32'd0);
    repeat (2000) @(posedge clk);
    rx_data.delete();
    for (int c = 0; c < N; c++) begin offs[c] = '0; host_write(REG_OFFSET + 16'(c), 0); end
    host_write(REG_FALLING, 0);
    sma_in[10] = 1'b0;
    pat[0] = 32'h0000_0006;                           // channels 1 and 2
    pat[1] = 32'h8000_0001;                           // channels 0 and 31
    host_write(REG_PATTERN + 0, pat[0]);
    host_write(REG_PATTERN + 1, pat[1]);
    host_write(REG_WINDOW, 300);
    host_write(REG_THRESHOLD, 2);
    repeat (10) @(posedge clk);
    filt0 = int'(n_filtered);
    exp_filtered = 0;
    host_write(REG_CTRL, {28'd0, MODE_COINC_TS, 1'b0, 1'b1});
    repeat (20) @(posedge clk);
    for (int s = 0; s < 150; s++) begin
      @(posedge clk);
      case (s % 5)
        0: begin pulse(1, $urandom_range(0, 255), 0, 1); pulse(2, $urandom_range(0, 255), 0, 1); end
        1: begin pulse(0, $urandom_range(0, 100), 0, 1); pulse(31, $urandom_range(0, 100), 0, 1); end
        2: pulse($urandom_range(0, N - 1), $urandom_range(0, 255), 0, 1);     // filtered
        default:
          for (int c = 0; c < N; c++)
            if ($urandom_range(0, 99) < 10) pulse(c, $urandom_range(0, 150), 0, 1);
      endcase
      repeat (40) @(posedge clk);
    end
    repeat (3000) @(posedge clk);
    expected_vectors(300, 2, 1, q);
    compare("coincidence with time-tags", q);
    check(int'(n_filtered) - filt0 == exp_filtered && exp_filtered > 0,
          $sformatf("filtered %0d, expected %0d", int'(n_filtered) - filt0, exp_filtered));
    check(n_trig_edges[0] == exp_match[0] && exp_match[0] > 0,
          $sformatf("trigger 0: %0d pulses, %0d matches", n_trig_edges[0], exp_match[0]));
    check(n_trig_edges[1] == exp_match[1] && exp_match[1] > 0,
          $sformatf("trigger 1: %0d pulses, %0d matches", n_trig_edges[1], exp_match[1]));

    // ---- 3: coincidence mode without time-tags, dead time on channel 5 ----
    host_write(REG_CTRL, {28'd0, MODE_COINC, 1'b0, 1'b1});
    host_write(REG_DEAD + 5, 7000);                   // about 27 periods
    host_write(REG_THRESHOLD, 1);
    repeat (20) @(posedge clk);
    dead_chan_hits = 0;
    for (int s = 0; s < 60; s++) begin
      @(posedge clk);
      // channel 5 fires every 20 periods: only every second one passes
      pulse(5, 7, 0, (s % 2) == 0);
      if (s % 3 == 0) pulse(6, 9, 0, 1);
      repeat (19) @(posedge clk);
    end
    repeat (3000) @(posedge clk);
    expected_vectors(300, 1, 0, q);
    compare("coincidence", q);
    check(drop_dead == 30, $sformatf("dead-time drops %0d, expected 30", drop_dead));
    host_write(REG_DEAD + 5, 0);

    // ---- 4: test pattern ----
    host_write(REG_CTRL, {28'd0, MODE_COINC, 1'b1, 1'b1});
    repeat (20) @(posedge clk);
    check(test_oe, "test_oe");
    for (int s = 0; s < 5; s++) begin
      @(posedge clk);
      fork
        begin
          #(77.5 * LSB) test_clk = 1;
          #(5 * T) test_clk = 0;
        end
      join_none
      repeat (100) @(posedge clk);
    end
    repeat (2000) @(posedge clk);
    for (int s = 0; s < 5; s++) q.push_back({W_COINC, 28'd0, 32'hFFFF_FFFF});
    compare("test pattern", q);
    host_write(REG_CTRL, {28'd0, MODE_TIMETAG, 1'b0, 1'b1});

    // ---- 5: overflow: the bridge stops taking data ----
    repeat (20) @(posedge clk);
    usb_full <= 1;
    for (int s = 0; s < 1500; s++) begin
      @(posedge clk);
      for (int c = 0; c < N; c++) pulse(c, 30, 0, 0);
      repeat (2) @(posedge clk);
    end
    repeat (20) @(posedge clk);
    usb_full <= 0;
    repeat (40000) @(posedge clk);
    check(drop_fifo > 0, "channel FIFOs overflowed");
    check(rx_data.size() + int'(drop_fifo) == 1500 * N,
          $sformatf("overflow: %0d words + %0d dropped != %0d", rx_data.size(), drop_fifo, 1500 * N));
    rx_data.delete();

    // ---- mechanisms ----
    check(n_status > 10, $sformatf("status words: %0d", n_status));
    check(n_stall > 0, "usb_full back-pressure");
    $display("status words %0d, bus stalls %0d, triggers %0d/%0d, filtered %0d, dead drops %0d, fifo drops %0d",
             n_status, n_stall, n_trig_edges[0], n_trig_edges[1], n_filtered, drop_dead, drop_fifo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
