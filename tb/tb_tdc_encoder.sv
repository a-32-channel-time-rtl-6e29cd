// tb_tdc_encoder -- drives a delay-line model with edges at known times and
// checks the tags from tdc_encoder. An edge placed j + 0.5 fine steps after
// clock edge k0 must give tag = k0 * 256 + j + 1 (the time rounded up to
// whole steps), for rising and for falling edges, and the tag must appear
// exactly 4 clock edges after the capturing edge.
`timescale 1ps/1fs
module tb_tdc_encoder;
  import ttcd_pkg::*;
  localparam real T   = 2272.727;
  localparam real LSB = T / 256.0;

  logic clk = 0, rst_n = 0, sig = 0, falling = 0;
  logic [7:0][31:0] taps;
  logic [COARSE_BITS-1:0] coarse = '0;
  logic hit_valid;
  tag_t hit_tag;
  int checks = 0, failures = 0, n_hits = 0;

  always #(T / 2) clk = ~clk;
  always @(posedge clk) coarse <= coarse + 1'b1;

  tdc_delay_line u_line (.sig(sig), .taps(taps));
  tdc_encoder dut (.clk, .rst_n, .taps, .coarse, .falling, .hit_valid, .hit_tag);

  tag_t exp_q[$];
  longint exp_k[$];

  always @(posedge clk) begin
    if (rst_n && hit_valid) begin
      tag_t e;
      longint k;
      n_hits++;
      checks += 2;
      if (exp_q.size() == 0) begin
        failures++;
        $display("unexpected hit %0d", hit_tag);
      end else begin
        e = exp_q.pop_front();
        k = exp_k.pop_front();
        if (hit_tag != e) begin
          failures++;
          $display("tag %0d, expected %0d", hit_tag, e);
        end
        if (longint'(coarse) != k + 4) begin
          failures++;
          $display("latency: seen at edge %0d, captured at %0d", coarse, k);
        end
      end
    end
  end

  initial begin
    repeat (4000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one edge of `level` placed (j + 0.5) steps after the clock edge that
  // saw coarse == k0
  task automatic place_edge(input int j, input logic level);
    longint k0;
    @(posedge clk);
    k0 = longint'(coarse);
    #((j + 0.5) * LSB);
    sig = level;
    exp_q.push_back(TAG_BITS'(k0 * 256 + j + 1));
    exp_k.push_back(k0 + 1);
  endtask

  initial begin
    int j;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    for (int n = 0; n < 60; n++) begin
      j = (n < 3) ? n * 127 : int'($urandom_range(0, 255));
      place_edge(j, 1'b1);
      repeat (3) @(posedge clk);
      #(T / 3) sig = 0;
      repeat (3) @(posedge clk);
    end
    // raise the input (one more rising edge), then switch polarity
    place_edge(100, 1'b1);
    repeat (6) @(posedge clk);
    falling = 1;
    repeat (4) @(posedge clk);
    for (int n = 0; n < 40; n++) begin
      j = int'($urandom_range(0, 255));
      place_edge(j, 1'b0);
      repeat (3) @(posedge clk);
      #(T / 3) sig = 1;
      repeat (3) @(posedge clk);
    end
    repeat (10) @(posedge clk);
    checks++;
    if (n_hits != 101 || exp_q.size() != 0) begin
      failures++;
      $display("%0d hits, %0d missing", n_hits, exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
