// tb_usb_interface -- random readout words and register replies in, random
// usb_full from the bridge. The 32-bit bus must carry every accepted word,
// replies formatted as W_REG words, upper half first, in acceptance order,
// and nothing while usb_full is high; with a backlog and no usb_full it must
// write every cycle. Host command pairs must become register accesses.
`timescale 1ps/1fs
module tb_usb_interface;
  import ttcd_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, reg_valid = 0, reg_ready;
  logic [63:0] in_word = '0;
  logic [15:0] reg_addr = '0;
  logic [31:0] reg_data = '0;
  logic cmd_valid, cmd_write;
  logic [15:0] cmd_addr;
  logic [31:0] cmd_data;
  logic [31:0] usb_dout, usb_din = '0, n_words;
  logic usb_wr, usb_full = 0, usb_din_valid = 0;
  int checks = 0, failures = 0, n_xfer = 0, n_cmd = 0;

  always #5 clk = ~clk;

  usb_interface #(.DEPTH(16)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_word,
    .reg_valid, .reg_ready, .reg_addr, .reg_data, .cmd_valid, .cmd_write, .cmd_addr, .cmd_data,
    .usb_dout, .usb_wr, .usb_full, .usb_din, .usb_din_valid, .n_words);

  logic [31:0] exp_q[$];
  logic full_d = 0;
  logic [48:0] cmd_q[$];

  always @(posedge clk) if (rst_n) begin
    if (reg_valid && reg_ready) begin
      exp_q.push_back({W_REG, 12'd0, reg_addr});
      exp_q.push_back(reg_data);
    end else if (in_valid && in_ready) begin
      exp_q.push_back(in_word[63:32]);
      exp_q.push_back(in_word[31:0]);
    end
    if (usb_wr) begin
      checks += 2;
      n_xfer++;
      if (full_d) begin failures++; $display("write while full"); end
      if (exp_q.size() == 0 || usb_dout != exp_q[0]) begin
        failures++; $display("bus %h expected %h", usb_dout, exp_q.size() ? exp_q[0] : 0);
      end
      if (exp_q.size()) void'(exp_q.pop_front());
    end
    full_d <= usb_full;
    if (cmd_valid) begin
      checks++;
      n_cmd++;
      if (cmd_q.size() == 0 || {cmd_write, cmd_addr, cmd_data} != cmd_q[0]) begin
        failures++; $display("command %b %h %h", cmd_write, cmd_addr, cmd_data);
      end
      if (cmd_q.size()) void'(cmd_q.pop_front());
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // host commands
  initial begin
    logic [48:0] c;
    repeat (5) @(posedge clk);
    for (int i = 0; i < 50; i++) begin
      c = {1'($urandom), 16'($urandom), 32'($urandom)};
      cmd_q.push_back(c);
      @(negedge clk) begin usb_din_valid = 1; usb_din = {c[48], 15'd0, c[47:32]}; end
      @(negedge clk) begin usb_din = c[31:0]; end
      @(negedge clk) usb_din_valid = 0;
      repeat ($urandom_range(0, 5)) @(negedge clk);
    end
  end

  initial begin
    int base;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (!in_valid || in_ready) begin
        in_valid = ($urandom_range(0, 2) == 0);
        in_word  = {$urandom, $urandom};
      end
      if (!reg_valid || reg_ready) begin
        reg_valid = ($urandom_range(0, 30) == 0);
        reg_addr  = 16'($urandom);
        reg_data  = $urandom;
      end
      usb_full = ($urandom_range(0, 3) == 0);
    end
    // backlog, then full rate
    @(negedge clk) begin reg_valid = 0; usb_full = 1; in_valid = 1; end
    repeat (40) begin
      @(negedge clk);
      if (in_ready) in_word = {$urandom, $urandom};
    end
    in_valid = 0;
    usb_full = 0;
    repeat (2) @(negedge clk);
    base = n_xfer;
    repeat (20) @(negedge clk);
    checks++;
    if (n_xfer - base != 20) begin failures++; $display("%0d writes in 20 cycles", n_xfer - base); end
    repeat (100) @(negedge clk);
    checks += 2;
    if (exp_q.size() != 0) begin failures++; $display("%0d halves missing", exp_q.size()); end
    if (n_cmd != 50) begin failures++; $display("%0d commands", n_cmd); end
    $display("transfers %0d words %0d commands %0d", n_xfer, n_words, n_cmd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
