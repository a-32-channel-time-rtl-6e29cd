// tb_pattern_trigger -- random vectors, some equal to one of the 8 pattern
// registers. Each output must go high on the cycle after a matching vector,
// stay high exactly PULSE_CYCLES cycles (restarting on a new match), and
// never fire otherwise; the match counters must agree with a model.
`timescale 1ps/1fs
module tb_pattern_trigger;
  localparam int unsigned N = 32, P = 8, PULSE = 10;
  logic clk = 0, rst_n = 0, vec_valid = 0;
  logic [N-1:0] vec = '0;
  logic [P-1:0][N-1:0] pattern;
  logic [P-1:0] trig;
  logic [P-1:0][15:0] n_trig;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pattern_trigger #(.N(N), .N_PAT(P), .PULSE_CYCLES(PULSE)) dut (
    .clk, .rst_n, .vec_valid, .vec, .pattern, .trig, .n_trig);

  // model: remaining pulse cycles per output
  int left[P];
  int n_match[P];

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < P; p++) begin
      checks++;
      if (trig[p] != (left[p] > 0)) begin
        failures++; $display("output %0d is %0b, model %0d cycles left", p, trig[p], left[p]);
      end
    end
    for (int p = 0; p < P; p++) begin
      if (vec_valid && vec == pattern[p]) begin left[p] = PULSE; n_match[p]++; end
      else if (left[p] > 0) left[p]--;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < P; p++) begin
      pattern[p] = {$urandom} | 32'h1;
      left[p] = 0;
      n_match[p] = 0;
    end
    pattern[7] = '0;   // a zero register never n_match
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      vec_valid = ($urandom_range(0, 3) == 0);
      case ($urandom_range(0, 2))
        0: vec = pattern[$urandom_range(0, P - 1)];
        1: vec = pattern[$urandom_range(0, P - 1)] ^ (32'h1 << $urandom_range(0, 31));
        default: vec = {$urandom};
      endcase
      if (vec == '0) vec = 32'h1;
    end
    @(negedge clk) vec_valid = 0;
    repeat (PULSE + 2) @(negedge clk);
    for (int p = 0; p < P; p++) begin
      checks++;
      if (int'(n_trig[p]) != n_match[p]) begin failures++; $display("counter %0d: %0d vs %0d", p, n_trig[p], n_match[p]); end
    end
    checks++;
    if (n_match[0] == 0 || n_match[7] != 0) begin failures++; $display("match coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
