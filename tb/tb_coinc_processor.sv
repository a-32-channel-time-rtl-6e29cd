// tb_coinc_processor -- a sorted stream of random hit clusters goes through
// the coincidence processor. A reference model (window opened by the first
// hit, later hits up to start + window join it, filter by bit count) gives
// the expected vectors; the DUT must produce exactly them, in order, under
// random back-pressure, count the filtered ones, close the last window
// without a further hit, and clamp a too-large window to 2.5 us.
`timescale 1ps/1fs
module tb_coinc_processor;
  import ttcd_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [WINDOW_BITS-1:0] window;
  logic [THRESH_BITS-1:0] threshold;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  chan_tag_t in_data;
  tag_t in_safe;
  coinc_t out_data;
  logic [31:0] n_filtered;
  int checks = 0, failures = 0, n_out = 0;

  always #5 clk = ~clk;

  coinc_processor dut (.clk, .rst_n, .window, .threshold, .in_valid, .in_ready, .in_data,
                       .in_safe, .out_valid, .out_ready, .out_data, .n_filtered);

  chan_tag_t stim[$];
  coinc_t    exp_q[$];
  int        exp_filtered;

  // reference model
  task automatic build_expected(input int win);
    logic [N_CH-1:0] v;
    tag_t s;
    bit open;
    open = 0;
    for (int i = 0; i <= stim.size(); i++) begin
      if (open && (i == stim.size() || stim[i].tag - s > TAG_BITS'(win))) begin
        if ($countones(v) >= threshold) exp_q.push_back('{vec: v, tag: s});
        else exp_filtered++;
        open = 0;
      end
      if (i < stim.size()) begin
        if (!open) begin open = 1; s = stim[i].tag; v = '0; end
        v[stim[i].ch] = 1'b1;
      end
    end
  endtask

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    n_out++;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected vector %h", out_data.vec); end
    else begin
      coinc_t e;
      e = exp_q.pop_front();
      if (out_data != e) begin
        failures++;
        $display("vector %h @%0d, expected %h @%0d", out_data.vec, out_data.tag, e.vec, e.tag);
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int win, input int thr, input bit backpressure);
    int base;
    base      = int'(n_filtered);
    window    = WINDOW_BITS'(win);
    threshold = THRESH_BITS'(thr);
    exp_filtered = 0;
    build_expected((win > int'(WINDOW_MAX)) ? int'(WINDOW_MAX) : win);
    while (stim.size()) begin
      @(negedge clk);
      out_ready = backpressure ? ($urandom_range(0, 2) != 0) : 1'b1;
      if (in_valid && in_ready) void'(stim.pop_front());
      in_valid = stim.size() != 0 && $urandom_range(0, 3) != 0;
      in_data  = stim.size() ? stim[0] : '0;
      in_safe  = stim.size() ? stim[0].tag : in_safe;
      if (!stim.size()) in_valid = 0;
    end
    // nothing more will come: move the safe time far ahead
    in_valid = 0;
    in_safe  = in_safe + TAG_BITS'(1 << 20);
    out_ready = 1;
    repeat (20) @(negedge clk);
    checks += 2;
    if (exp_q.size() != 0) begin failures++; $display("%0d vectors missing", exp_q.size()); end
    if (int'(n_filtered) - base != exp_filtered || (thr > 1 && exp_filtered == 0)) begin
      failures++; $display("filtered %0d expected %0d", int'(n_filtered) - base, exp_filtered);
    end
  endtask

  initial begin
    tag_t t;
    in_data = '0;
    in_safe = '0;
    window  = '0;
    threshold = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    t = TAG_BITS'(5000);
    // random clusters: hits of a cluster within 0..700 LSB, clusters apart
    for (int c = 0; c < 600; c++) begin
      int n;
      n = $urandom_range(1, 6);
      for (int h = 0; h < n; h++) begin
        stim.push_back('{ch: CH_BITS'($urandom_range(0, N_CH - 1)), tag: t});
        t += TAG_BITS'($urandom_range(0, 140));
      end
      t += TAG_BITS'($urandom_range(200, 3000));
    end
    @(negedge clk);
    run(400, 2, 1);
    // no filter, no back-pressure: window and rate
    t += TAG_BITS'(100000);
    for (int c = 0; c < 300; c++) begin
      stim.push_back('{ch: CH_BITS'($urandom_range(0, N_CH - 1)), tag: t});
      t += TAG_BITS'($urandom_range(0, 600));
    end
    run(256, 0, 0);
    // a window beyond 2.5 us is clamped to 281600 LSB
    t += TAG_BITS'(1000000);
    stim.push_back('{ch: 0, tag: t});
    stim.push_back('{ch: 1, tag: t + TAG_BITS'(WINDOW_MAX)});
    stim.push_back('{ch: 2, tag: t + TAG_BITS'(WINDOW_MAX + 1)});
    run((1 << WINDOW_BITS) - 1, 1, 0);
    $display("vectors %0d", n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
