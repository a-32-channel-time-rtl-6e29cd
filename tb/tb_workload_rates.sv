// tb_workload_rates -- the whole unit at its default size, run at the rates
// and in the self-test configuration the original system was evaluated with.
// A host model reads the 32-bit USB bus with usb_full low, as a bridge that
// keeps up, and every word is checked against a reference model:
//   A 200 million pulses per second on average: every channel fires at
//     random with probability 1/70.4 per 440 MHz cycle, in time-tagging
//     mode. Every tag must come out, in time order, with no drop. The
//     offered rate and the peak fill of the USB FIFO are printed.
//   B bursts above that rate: all 32 channels fire every fourth cycle for
//     400 cycles (3.5 G tags/s for 0.9 us). The channel FIFOs must absorb
//     the burst without loss.
//   C coincidence mode at 100 million pairs per second: channel c and
//     c+16 fire within 100 steps of each other; window 100 steps. The
//     vectors are checked against the window rule.
//   D the 2 MHz self-test: the test clock drives all 32 channels, 100
//     edges at random phases. Every edge must give 32 equal tags at the
//     edge time, so the time-interval error of every channel against the
//     mean of the 32 is zero in this ideal-tap model.
// The rates are the paper's; the burst shape and the coincidence pattern
// are this testbench's own choice.
`timescale 1ps/1fs
module tb_workload_rates;
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
  logic [63:0] rx_data[$];
  int   n_status = 0, max_usb_level = 0;
  logic [31:0] hi;
  bit   have_hi = 0;
  logic [63:0] w;

  always @(posedge clk) if (rst_n) begin
    if (usb_wr) begin
      if (!have_hi) begin hi = usb_dout; have_hi = 1; end
      else begin
        have_hi = 0;
        w = {hi, usb_dout};
        if (w[63:60] == W_STATUS) n_status++;
        else if (w[63:60] != W_REG) rx_data.push_back(w);
      end
    end
  end

  task automatic host_write(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk) begin usb_din_valid = 1; usb_din = {1'b1, 15'd0, a}; end
    @(negedge clk) usb_din = d;
    @(negedge clk) usb_din_valid = 0;
  endtask

  // ---------------- stimulus and reference ----------------
  longint exp_keys[$];          // tag * 32 + channel of every expected hit
  int     busy_until[N];        // first cycle a channel may fire again
  int     cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // an edge on channel ch, j + 0.5 steps after the current clock edge
  task automatic pulse(int ch, int j);
    tag_t t;
    t = TAG_BITS'(dut.u_mcttu.now) * 256 + TAG_BITS'(j + 1);
    exp_keys.push_back(longint'(t) * 32 + ch);
    busy_until[ch] = cyc + 4;     // low for over a period before the next edge
    fork
      begin
        #((j + 0.5) * LSB);
        sma_in[ch] = 1'b1;
        #(1.5 * T);
        sma_in[ch] = 1'b0;
      end
    join_none
  endtask

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

  function automatic void expected_tags(ref logic [63:0] q[$]);
    exp_keys.sort();
    foreach (exp_keys[i]) q.push_back({W_TAG, exp_keys[i][4:0], TAG_BITS'(exp_keys[i] >> 5)});
    exp_keys.delete();
  endfunction

  function automatic void expected_vectors(input int win, ref logic [63:0] q[$]);
    logic [N-1:0] v;
    tag_t s, t;
    bit open;
    open = 0;
    exp_keys.sort();
    for (int i = 0; i <= exp_keys.size(); i++) begin
      if (i < exp_keys.size()) t = TAG_BITS'(exp_keys[i] >> 5);
      if (open && (i == exp_keys.size() || t - s > TAG_BITS'(win))) begin
        q.push_back({W_COINC, 28'd0, v});
        open = 0;
      end
      if (i < exp_keys.size()) begin
        if (!open) begin open = 1; s = t; v = '0; end
        v[exp_keys[i][4:0]] = 1'b1;
      end
    end
    exp_keys.delete();
  endfunction

  always @(posedge clk) if (rst_n && int'(dut.u_usb.count) > max_usb_level)
    max_usb_level <= int'(dut.u_usb.count);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] q[$];
    int   n_a, c0, c1, n_pairs;
    real  rate;
    foreach (busy_until[c]) busy_until[c] = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    host_write(REG_STATUS_P, 20000);
    // ---- A: 200 M pulses/s, time-tagging ----
    host_write(REG_CTRL, {28'd0, MODE_TIMETAG, 1'b0, 1'b1});
    repeat (20) @(posedge clk);
    c0 = cyc;
    for (int s = 0; s < 40000; s++) begin
      @(posedge clk);
      for (int c = 0; c < N; c++)
        if (cyc >= busy_until[c] && $urandom_range(0, 70399) < 1040) pulse(c, $urandom_range(0, 255));
    end
    c1 = cyc;
    n_a = exp_keys.size();
    rate = real'(n_a) / real'(c1 - c0) * 440.0;
    $display("A: %0d pulses in %0d cycles = %0.1f M pulses/s", n_a, c1 - c0, rate);
    check(rate > 190.0 && rate < 210.0, "offered rate is about 200 M pulses/s");
    repeat (2000) @(posedge clk);
    expected_tags(q);
    compare("A 200 M pulses/s", q);
    check(drop_fifo == 0, $sformatf("A: %0d tags dropped", drop_fifo));
    $display("A: USB FIFO peak level %0d of 1024 words", max_usb_level);

    // ---- B: bursts on all channels ----
    for (int b = 0; b < 3; b++) begin
      for (int s = 0; s < 100; s++) begin
        @(posedge clk);
        for (int c = 0; c < N; c++) pulse(c, $urandom_range(0, 255));
        repeat (3) @(posedge clk);
      end
      repeat (8000) @(posedge clk);
    end
    expected_tags(q);
    compare("B bursts", q);
    check(drop_fifo == 0, $sformatf("B: %0d tags dropped", drop_fifo));

    // ---- C: coincidence mode, 100 M pairs/s ----
    host_write(REG_CTRL, 32'd0);
    repeat (200) @(posedge clk);
    rx_data.delete();
    host_write(REG_WINDOW, 100);
    host_write(REG_CTRL, {28'd0, MODE_COINC, 1'b0, 1'b1});
    repeat (20) @(posedge clk);
    n_pairs = 0;
    for (int s = 0; s < 20000; s++) begin
      int c, j;
      @(posedge clk);
      c = $urandom_range(0, 15);
      if (cyc >= busy_until[c] && cyc >= busy_until[c + 16] && $urandom_range(0, 21) < 5) begin
        j = $urandom_range(0, 155);
        pulse(c, j);
        pulse(c + 16, j + $urandom_range(0, 100));
        n_pairs++;
      end
    end
    $display("C: %0d pairs in 20000 cycles = %0.1f M pairs/s", n_pairs, real'(n_pairs) / 20000.0 * 440.0);
    repeat (2000) @(posedge clk);
    expected_vectors(100, q);
    compare("C coincidence", q);
    check(drop_fifo == 0, "C: no drops");

    // ---- D: 2 MHz self-test in time-tagging mode ----
    host_write(REG_CTRL, {28'd0, MODE_TIMETAG, 1'b1, 1'b1});
    repeat (20) @(posedge clk);
    rx_data.delete();
    for (int e = 0; e < 100; e++) begin
      int j;
      tag_t t;
      @(posedge clk);
      j = $urandom_range(0, 255);
      t = TAG_BITS'(dut.u_mcttu.now) * 256 + TAG_BITS'(j + 1);
      fork
        begin
          #((j + 0.5) * LSB) test_clk = 1;
          #(110 * T) test_clk = 0;
        end
      join_none
      repeat (219) @(posedge clk);
      // 500 ns later all 32 tags of this edge have left the unit
      check(rx_data.size() == N, $sformatf("D edge %0d: %0d tags", e, rx_data.size()));
      begin
        longint sum;
        sum = 0;
        foreach (rx_data[i]) sum += longint'(rx_data[i][54:0]);
        foreach (rx_data[i]) begin
          checks++;
          if (rx_data[i][54:0] != t || longint'(rx_data[i][54:0]) * N != sum) begin
            failures++;
            $display("D edge %0d channel %0d: tag %0d, edge %0d", e, rx_data[i][59:55], rx_data[i][54:0], t);
          end
        end
      end
      rx_data.delete();
    end
    host_write(REG_CTRL, 32'd0);

    check(n_status > 0, "status words");
    $display("status words %0d, fifo drops %0d", n_status, drop_fifo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
