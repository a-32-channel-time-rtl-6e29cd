// tb_tdc_delay_line -- checks the behavioural carry-chain model: after an
// edge has run for (d + 0.5) fine steps, the eight chains together must
// hold d + 1 ones, and chain 0 alone floor((d + 0.5) / 8) + 1 ones.
`timescale 1ps/1fs
module tb_tdc_delay_line;
  localparam real T   = 2272.727;
  localparam real LSB = T / 256.0;
  logic sig;
  logic [7:0][31:0] taps;
  int checks = 0, failures = 0;

  tdc_delay_line dut (.sig(sig), .taps(taps));

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d, ones, c0;
    sig = 0;
    #(5000);
    for (int n = 0; n < 40; n++) begin
      d = (n < 4) ? n * 85 : int'($urandom_range(0, 255));
      sig = 1;
      #((d + 0.5) * LSB);
      ones = $countones(taps);
      c0   = $countones(taps[0]);
      checks += 2;
      if (ones != d + 1) begin
        failures++;
        $display("d=%0d: %0d ones, expected %0d", d, ones, d + 1);
      end
      if (c0 != (d / 8) + 1) begin
        failures++;
        $display("d=%0d: chain 0 has %0d ones, expected %0d", d, c0, d / 8 + 1);
      end
      #(2 * T);
      // the whole line is full one period after the edge
      checks++;
      if (taps != '1) begin failures++; $display("line not full"); end
      sig = 0;
      #(2 * T);
      checks++;
      if (taps != '0) begin failures++; $display("line not empty"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
