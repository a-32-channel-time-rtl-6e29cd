// tb_tag_sorter -- eight channel queues stand in for the FIFOs. Tags are
// created with times no earlier than (now - 8) x 256, as the TDC pipeline
// guarantees, in random bursts. The output must hold every tag exactly
// once with its channel, in time order (ties by channel), no output may be
// earlier than a safe time reported before it, and with a backlog and a
// ready sink the sorter must send one tag every cycle.
`timescale 1ps/1fs
module tb_tag_sorter;
  import ttcd_pkg::*;
  localparam int unsigned N = 8;
  logic clk = 0, rst_n = 0;
  logic [COARSE_BITS-1:0] now = '0;
  logic [N-1:0] head_valid = '0, pop;
  tag_t [N-1:0] head_tag = '0;
  logic out_valid, out_ready = 1;
  chan_tag_t out_data;
  tag_t out_safe;
  int checks = 0, failures = 0, n_out = 0, n_in = 0;
  bit  gen = 1;

  always #5 clk = ~clk;

  tag_sorter #(.N(N), .HOLDOFF(16)) dut (.clk, .rst_n, .now, .head_valid, .head_tag,
                                         .pop, .out_valid, .out_ready, .out_data, .out_safe);

  function automatic bit is_earlier(tag_t a, tag_t b);
    tag_t d;
    d = a - b;
    return d[TAG_BITS-1];
  endfunction

  tag_t q[N][$];
  tag_t last_tag;
  chan_t last_ch;
  bit   have_last = 0;
  tag_t safe_bound;
  bit   have_safe = 0;
  int   sent[longint];   // key: tag * 32 + channel
  int   busy_cycles = 0, busy_outputs = 0;

  always @(posedge clk) begin
    now <= now + 1'b1;
    if (rst_n) begin
      for (int i = 0; i < N; i++) if (pop[i]) void'(q[i].pop_front());
      if (gen) begin
        for (int i = 0; i < N; i++) begin
          if ($urandom_range(0, 99) < 12) begin
            tag_t t;
            t = {now - COARSE_BITS'(8), 8'd0} + TAG_BITS'($urandom_range(0, 2047));
            if (q[i].size() && t < q[i][$]) t = q[i][$];
            q[i].push_back(t);
            if (sent.exists(longint'(t) * 32 + i)) sent[longint'(t) * 32 + i]++;
            else sent[longint'(t) * 32 + i] = 1;
            n_in++;
          end
        end
      end
      for (int i = 0; i < N; i++) begin
        head_valid[i] <= q[i].size() != 0;
        head_tag[i]   <= q[i].size() ? q[i][0] : '0;
      end
      if (out_valid && out_ready) begin
        longint key;
        n_out++;
        checks += 3;
        key = longint'(out_data.tag) * 32 + out_data.ch;
        if (!sent.exists(key)) begin failures++; $display("unknown tag %0d ch %0d", out_data.tag, out_data.ch); end
        else if (--sent[key] == 0) sent.delete(key);
        if (have_last && (is_earlier(out_data.tag, last_tag) || (out_data.tag == last_tag && out_data.ch < last_ch))) begin
          failures++; $display("order: %0d after %0d", out_data.tag, last_tag);
        end
        // times may wrap: compare by the sign of the difference
        if (have_safe && is_earlier(out_data.tag, safe_bound)) begin
          failures++; $display("tag %0d below reported safe time %0d", out_data.tag, safe_bound);
        end
        last_tag = out_data.tag; last_ch = out_data.ch; have_last = 1;
      end
      if (!out_valid) begin safe_bound = out_safe; have_safe = 1; end
    end
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int base;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // random back-pressure
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk) out_ready = ($urandom_range(0, 3) != 0);
    end
    // backlog: stop the sink, let the queues fill, then measure the rate
    out_ready = 0;
    repeat (200) @(negedge clk);
    gen = 0;
    repeat (20) @(negedge clk);
    out_ready = 1;
    base = n_out;
    repeat (100) @(negedge clk);
    checks++;
    if (n_out - base != 100) begin failures++; $display("%0d tags in 100 cycles", n_out - base); end
    repeat (1000) @(negedge clk);
    checks++;
    if (sent.num() != 0) begin failures++; $display("%0d tags never sent", sent.num()); end
    $display("tags in %0d out %0d", n_in, n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
