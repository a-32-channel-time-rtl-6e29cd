// tb_protocol_gen -- random time-tag and coincidence streams, random
// back-pressure, all three run modes. The data words (status words aside)
// must be exactly the formatted source of the selected mode, in order; the
// other source must be drained; status words must come once per period and
// carry the saturated drop count and a coarse time that is not ahead of the
// current time.
`timescale 1ps/1fs
module tb_protocol_gen;
  import ttcd_pkg::*;
  localparam int unsigned PERIOD = 50;
  logic clk = 0, rst_n = 0, run = 1;
  run_mode_e mode;
  logic [COARSE_BITS-1:0] now = '0;
  logic [31:0] drop_count;
  logic tag_valid = 0, tag_ready, coinc_valid = 0, coinc_ready, out_valid, out_ready = 1;
  chan_tag_t tag_data = '0;
  coinc_t coinc_data = '0;
  logic [63:0] out_word;
  logic [31:0] n_status;
  int checks = 0, failures = 0, n_data = 0, n_stat = 0;

  always #5 clk = ~clk;
  always @(posedge clk) now <= now + 1'b1;

  protocol_gen dut (.clk, .rst_n, .run, .mode, .status_period(32'(PERIOD)), .now, .drop_count,
                    .tag_valid, .tag_ready, .tag_data, .coinc_valid, .coinc_ready, .coinc_data,
                    .out_valid, .out_ready, .out_word, .n_status);

  logic [63:0] exp_q[$];

  always @(posedge clk) if (rst_n) begin
    if (tag_valid && tag_ready && mode == MODE_TIMETAG)
      exp_q.push_back({W_TAG, tag_data.ch, tag_data.tag});
    if (coinc_valid && coinc_ready && mode == MODE_COINC)
      exp_q.push_back({W_COINC, 28'd0, coinc_data.vec});
    if (coinc_valid && coinc_ready && mode == MODE_COINC_TS) begin
      exp_q.push_back({W_COINC_TS, 28'd0, coinc_data.vec});
      exp_q.push_back({W_TIME, 5'd0, coinc_data.tag});
    end
    if (out_valid && out_ready) begin
      checks++;
      if (out_word[63:60] == W_STATUS) begin
        logic [12:0] d;
        n_stat++;
        d = (drop_count > 32'h1FFF) ? 13'h1FFF : drop_count[12:0];
        if (out_word[59:47] != d || out_word[46:0] > now) begin
          failures++; $display("status word %h", out_word);
        end
      end else begin
        n_data++;
        if (exp_q.size() == 0 || out_word != exp_q[0]) begin
          failures++; $display("word %h expected %h", out_word, exp_q.size() ? exp_q[0] : 64'd0);
        end
        if (exp_q.size()) void'(exp_q.pop_front());
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_mode(input run_mode_e m, input logic [31:0] drops);
    int s0, cyc;
    mode = m;
    drop_count = drops;
    s0 = n_stat;
    cyc = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      cyc++;
      // hold data while a transfer is pending, as a valid/ready source must
      if (!tag_valid || tag_ready) begin
        tag_valid = ($urandom_range(0, 1) == 0);
        tag_data  = '{ch: CH_BITS'($urandom), tag: TAG_BITS'({$urandom, $urandom})};
      end
      if (!coinc_valid || coinc_ready) begin
        coinc_valid = ($urandom_range(0, 2) == 0);
        coinc_data  = '{vec: {$urandom}, tag: TAG_BITS'({$urandom, $urandom})};
      end
      out_ready = ($urandom_range(0, 4) != 0);
    end
    // drain
    @(negedge clk);
    tag_valid = 0; coinc_valid = 0; out_ready = 1;
    repeat (PERIOD + 20) @(negedge clk);
    cyc += PERIOD + 21;
    checks += 2;
    if (exp_q.size() != 0) begin failures++; $display("mode %0d: %0d words missing", m, exp_q.size()); end
    if (n_stat - s0 < cyc / PERIOD - 2 || n_stat - s0 > cyc / PERIOD + 1) begin
      failures++; $display("mode %0d: %0d status words in %0d cycles", m, n_stat - s0, cyc);
    end
  endtask

  initial begin
    mode = MODE_TIMETAG;
    drop_count = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_mode(MODE_TIMETAG, 32'd77);
    run_mode(MODE_COINC, 32'd20000);
    run_mode(MODE_COINC_TS, 32'd5);
    checks++;
    if (int'(n_status) != n_stat) begin failures++; $display("status counter"); end
    $display("data words %0d status words %0d", n_data, n_stat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
