// tb_tag_conditioner -- random hits through the offset adder and dead-time
// filter. A reference model adds the offset, drops tags closer than the dead
// time to the last accepted tag, and drops everything while the channel is
// disabled; outputs must match it tag by tag, 2 cycles after the input.
`timescale 1ps/1fs
module tb_tag_conditioner;
  import ttcd_pkg::*;
  logic clk = 0, rst_n = 0, enable = 1;
  logic [OFFSET_BITS-1:0] offset;
  logic [DEAD_BITS-1:0] dead;
  logic in_valid = 0, out_valid, drop_dead;
  tag_t in_tag, out_tag;
  int checks = 0, failures = 0, n_out = 0, n_drop = 0;

  always #5 clk = ~clk;

  tag_conditioner dut (.clk, .rst_n, .enable, .offset, .dead, .in_valid, .in_tag,
                       .out_valid, .out_tag, .drop_dead);

  // reference
  tag_t   exp_q[$];
  longint exp_t[$];
  longint cyc = 0;
  tag_t   last;
  bit     have_last = 0;
  int     exp_drops = 0;

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid) begin
      n_out++;
      checks += 2;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected output %0d at %0d", out_tag, cyc);
      end else begin
        tag_t e;
        longint t;
        e = exp_q.pop_front();
        t = exp_t.pop_front();
        if (out_tag != e) begin failures++; $display("tag %0d expected %0d", out_tag, e); end
        // driven before edge t+1, registered at t+2, seen at edge t+3
        if (cyc != t + 3) begin failures++; $display("latency %0d", cyc - t); end
      end
    end
    if (rst_n && drop_dead) n_drop++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tag_t t;
    tag_t x;
    offset = 20'd1234;
    dead   = '0;
    in_tag = '0;
    t = TAG_BITS'(1000);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 4; phase++) begin
      dead   = (phase == 0) ? '0 : DEAD_BITS'($urandom_range(100, 3000));
      offset = OFFSET_BITS'($urandom_range(0, 1 << 19));
      enable = (phase != 2);
      have_last = 0;
      // let the filter forget: a long gap
      t += TAG_BITS'(1 << 21);
      repeat (3) @(posedge clk);
      for (int n = 0; n < 300; n++) begin
        @(negedge clk);
        if ($urandom_range(0, 1)) begin
          t += TAG_BITS'($urandom_range(1, 1500));
          in_valid = 1;
          in_tag   = t;
          x = t + TAG_BITS'(offset);
          if (enable) begin
            if (have_last && dead != 0 && (x - last) < TAG_BITS'(dead)) exp_drops++;
            else begin
              exp_q.push_back(x);
              exp_t.push_back(cyc);
              last = x;
              have_last = 1;
            end
          end
        end else in_valid = 0;
      end
      @(negedge clk) in_valid = 0;
      repeat (5) @(posedge clk);
    end
    checks += 2;
    if (exp_q.size() != 0) begin failures++; $display("%0d tags missing", exp_q.size()); end
    if (n_drop != exp_drops || exp_drops == 0) begin
      failures++; $display("dead-time drops %0d expected %0d", n_drop, exp_drops);
    end
    $display("outputs %0d, dead-time drops %0d", n_out, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
