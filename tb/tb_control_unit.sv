// tb_control_unit -- checks the reset values, then writes random values to
// every register of the map, checks the matching cfg field, and reads every
// register back through the reply port (one reply per read, held until
// reg_ready). Unknown addresses read as zero and change nothing.
`timescale 1ps/1fs
module tb_control_unit;
  import ttcd_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_write = 0, reg_valid, reg_ready = 1;
  logic [15:0] cmd_addr = '0, reg_addr;
  logic [31:0] cmd_data = '0, reg_data;
  cfg_t cfg;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  control_unit #(.STATUS_DEFAULT(1234)) dut (.clk, .rst_n, .cmd_valid, .cmd_write, .cmd_addr,
                                            .cmd_data, .reg_valid, .reg_ready, .reg_addr,
                                            .reg_data, .cfg);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk) begin cmd_valid = 1; cmd_write = 1; cmd_addr = a; cmd_data = d; end
    @(negedge clk) cmd_valid = 0;
  endtask

  task automatic rd(input logic [15:0] a, input logic [31:0] expv);
    @(negedge clk) begin cmd_valid = 1; cmd_write = 0; cmd_addr = a; reg_ready = 0; end
    @(negedge clk) cmd_valid = 0;
    repeat (2) @(negedge clk);
    check(reg_valid && reg_addr == a && reg_data == expv, $sformatf("read %h: %h, expected %h", a, reg_data, expv));
    reg_ready = 1;
    @(negedge clk);
    check(!reg_valid, "reply not released");
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v, pat[8], off[32], dd[32];
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!cfg.run && cfg.mode == MODE_TIMETAG && cfg.ch_en == '1 && cfg.threshold == 1 &&
          cfg.window == 256 && cfg.status_period == 1234, "reset values");
    wr(REG_CTRL, 32'b1001);
    check(cfg.run && cfg.test_en == 0 && cfg.mode == MODE_COINC_TS, "ctrl");
    v = $urandom; wr(REG_WINDOW, v);
    check(cfg.window == v[WINDOW_BITS-1:0], "window");
    rd(REG_WINDOW, 32'(v[WINDOW_BITS-1:0]));
    v = $urandom; wr(REG_THRESHOLD, v);
    check(cfg.threshold == v[THRESH_BITS-1:0], "threshold");
    v = $urandom; wr(REG_STATUS_P, v);
    check(cfg.status_period == v, "status period");
    rd(REG_STATUS_P, v);
    v = $urandom; wr(REG_CH_EN, v);
    check(cfg.ch_en == v, "channel enables");
    v = $urandom; wr(REG_FALLING, v);
    check(cfg.falling == v, "falling");
    rd(REG_FALLING, v);
    for (int p = 0; p < 8; p++) begin pat[p] = $urandom; wr(REG_PATTERN + 16'(p), pat[p]); end
    for (int c = 0; c < 32; c++) begin off[c] = $urandom; wr(REG_OFFSET + 16'(c), off[c]); end
    for (int c = 0; c < 32; c++) begin dd[c] = $urandom; wr(REG_DEAD + 16'(c), dd[c]); end
    wr(16'h7777, 32'hFFFFFFFF);
    for (int p = 0; p < 8; p++) begin
      check(cfg.pattern[p] == pat[p], $sformatf("pattern %0d", p));
      rd(REG_PATTERN + 16'(p), pat[p]);
    end
    for (int c = 0; c < 32; c++) begin
      check(cfg.offset[c] == off[c][OFFSET_BITS-1:0], $sformatf("offset %0d", c));
      check(cfg.dead[c] == dd[c][DEAD_BITS-1:0], $sformatf("dead %0d", c));
      rd(REG_OFFSET + 16'(c), 32'(off[c][OFFSET_BITS-1:0]));
      rd(REG_DEAD + 16'(c), 32'(dd[c][DEAD_BITS-1:0]));
    end
    rd(REG_CTRL, 32'b1001);
    rd(16'h7777, 32'd0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
