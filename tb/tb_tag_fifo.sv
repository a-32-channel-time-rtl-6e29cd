// tb_tag_fifo -- random writes and pops against a queue model: every popped
// word must be the oldest accepted one, a FIFO filled without pops must
// take exactly DEPTH + 1 words and flag the rest as overflow, and a word
// written into an empty FIFO must be at the head 2 cycles later.
`timescale 1ps/1fs
module tb_tag_fifo;
  localparam int unsigned W = 55, D = 16;
  logic clk = 0, rst_n = 0, wr = 0, pop = 0, overflow, head_valid;
  logic [W-1:0] din = '0, head_data;
  int checks = 0, failures = 0, n_ovf = 0, n_acc = 0, n_pop = 0;
  logic [W-1:0] ref_q[$];

  always #5 clk = ~clk;

  tag_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .wr, .din, .overflow,
                                        .head_valid, .head_data, .pop);

  always @(posedge clk) if (rst_n) begin
    if (wr && !overflow) begin ref_q.push_back(din); n_acc++; end
    if (wr && overflow) n_ovf++;
    if (pop) begin
      checks++;
      n_pop++;
      if (ref_q.size() == 0 || head_data != ref_q[0]) begin
        failures++; $display("popped %h, expected %h", head_data, ref_q.size() ? ref_q[0] : '0);
      end
      if (ref_q.size()) void'(ref_q.pop_front());
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // latency into an empty FIFO
    @(negedge clk) begin wr = 1; din = W'(55'h123456789); end
    @(negedge clk) wr = 0;
    checks++;
    if (head_valid) begin failures++; $display("head too early"); end
    @(negedge clk);
    checks++;
    if (!head_valid || head_data != W'(55'h123456789)) begin failures++; $display("head not there after 2 cycles"); end
    pop = 1;
    @(negedge clk) pop = 0;
    // fill without popping
    n_acc = 0; n_ovf = 0;
    for (int i = 0; i < D + 6; i++) begin
      @(negedge clk) begin wr = 1; din = W'({$urandom, $urandom}); end
    end
    @(negedge clk) wr = 0;
    repeat (3) @(negedge clk);
    checks += 2;
    if (n_acc != D + 1) begin failures++; $display("took %0d words", n_acc); end
    if (n_ovf != 5) begin failures++; $display("%0d overflows", n_ovf); end
    // random traffic
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      wr  = ($urandom_range(0, 99) < 45);
      din = W'({$urandom, $urandom});
      pop = head_valid && ($urandom_range(0, 99) < 50);
    end
    @(negedge clk) wr = 0;
    while (head_valid) begin
      pop = 1;
      @(negedge clk);
    end
    pop = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (ref_q.size() != 0) begin failures++; $display("%0d words lost", ref_q.size()); end
    $display("pops %0d overflows %0d", n_pop, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
