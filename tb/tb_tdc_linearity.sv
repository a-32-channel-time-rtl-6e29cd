// tb_tdc_linearity -- code-density linearity measurement of one TDC channel
// built from non-uniform delay elements (tdc_delay_line with TAP_SPREAD =
// 0.3, each element 0.7 to 1.3 times its nominal delay) and tdc_encoder.
//
// The way the linearity of the original unit was measured: edges are swept
// through the delay line at evenly spaced phases, 8 per fine step, across a
// whole sampling period. The number of edges that land on each fine code is
// that code's width (DNL), and the running sum gives each code boundary's
// position in time (INL). The testbench checks:
//   - one hit per edge, with fine codes that never decrease as the phase
//     grows;
//   - every code equals what the model's own tap switching times predict
//     (phases within 0.2 ps of a tap's switching time are left out, as
//     rounding decides them);
//   - the INL found by the code-density method matches the true INL of the
//     model to within one sweep step;
//   - the sum over eight chains has a smaller worst INL than the chains
//     have on their own, which is why the TDC averages eight chains.
// Spread, sweep density and seed are this testbench's choice; the paper
// gives no mismatch figures.
`timescale 1ps/1fs
module tb_tdc_linearity;
  import ttcd_pkg::*;
  localparam real T      = 2272.727;
  localparam real LSB    = T / 256.0;
  localparam int  SUB    = 8;
  localparam real SPREAD = 0.3;

  logic clk = 0, rst_n = 0, sig = 0, falling = 0;
  logic [7:0][31:0] taps;
  logic [COARSE_BITS-1:0] coarse = '0;
  logic hit_valid;
  tag_t hit_tag;
  int checks = 0, failures = 0;

  always #(T / 2) clk = ~clk;
  always @(posedge clk) coarse <= coarse + 1'b1;

  tdc_delay_line #(.TAP_SPREAD(SPREAD), .SEED(7)) u_line (.sig(sig), .taps(taps));
  tdc_encoder dut (.clk, .rst_n, .taps, .coarse, .falling, .hit_valid, .hit_tag);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // the model's tap switching times, from the same formula it uses
  real tsw[8][32];
  real ev_t[$];
  initial begin
    for (int k = 0; k < 8; k++)
      for (int i = 0; i < 32; i++) begin
        tsw[k][i] = tap_time(k, i, 8, 32, T, SPREAD, 7);
        ev_t.push_back(tsw[k][i]);
      end
    ev_t.sort();
  end

  tag_t   hits[$];
  always @(posedge clk) if (rst_n && hit_valid) hits.push_back(hit_tag);

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int   hist[257];
    int   code, prev_code, n_amb, s_exp, below, bad;
    real  tau, elapsed, t_edge, inl_est, inl_true, inl8, dnl, single, chain_max, e;
    bit   amb;
    foreach (hist[c]) hist[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);

    prev_code = 0;
    n_amb = 0;
    bad = 0;
    for (int p = 0; p < 256 * SUB; p++) begin
      longint k0;
      tau = (real'(p) + 0.5) / real'(SUB) * LSB;
      @(posedge clk);
      k0 = longint'(coarse);
      #(tau);
      t_edge = $realtime;
      sig = 1;
      @(posedge clk);
      elapsed = $realtime - t_edge;
      repeat (5) @(posedge clk);
      check(hits.size() == 1, $sformatf("phase %0d: %0d hits", p, hits.size()));
      if (hits.size() == 0) continue;
      code = int'(hits[0] - TAG_BITS'(k0 * 256));
      hits.delete();
      check(code >= 1 && code <= 256 && code >= prev_code,
            $sformatf("phase %0d: code %0d after %0d", p, code, prev_code));
      prev_code = code;
      if (code >= 1 && code <= 256) hist[code]++;
      // the code the model's switching times predict
      s_exp = 0;
      amb = 0;
      for (int k = 0; k < 8; k++)
        for (int i = 0; i < 32; i++) begin
          if (tsw[k][i] <= elapsed) s_exp++;
          if (tsw[k][i] > elapsed - 0.2 && tsw[k][i] < elapsed + 0.2) amb = 1;
        end
      if (amb) n_amb++;
      else begin
        checks++;
        if (code != 257 - s_exp) begin
          failures++;
          if (bad++ < 5) $display("phase %0d: code %0d, model predicts %0d", p, code, 257 - s_exp);
        end
      end
      #(T / 3) sig = 0;
      repeat (3) @(posedge clk);
    end
    check(n_amb < 256 * SUB / 10, $sformatf("%0d phases too close to a switching time", n_amb));

    // code density: upper boundary of code c lies at (edges with code <= c) / SUB steps
    below = 0;
    inl8 = 0.0;
    dnl = 0.0;
    for (int c = 1; c <= 255; c++) begin
      below += hist[c];
      inl_est  = real'(below) / real'(SUB) - real'(c);
      // a boundary before phase 0 (the last taps switch after one period) reads as 0
      inl_true = (T - ev_t[256 - c]) / LSB;
      if (inl_true < 0.0) inl_true = 0.0;
      inl_true = inl_true - real'(c);
      checks++;
      if (inl_est - inl_true > 1.0 / SUB + 0.05 || inl_true - inl_est > 1.0 / SUB + 0.05) begin
        failures++;
        $display("code %0d: measured INL %0.3f, true %0.3f", c, inl_est, inl_true);
      end
      if (inl_est > inl8) inl8 = inl_est;
      if (-inl_est > inl8) inl8 = -inl_est;
      e = real'(hist[c]) / real'(SUB) - 1.0;
      if (e > dnl) dnl = e;
      if (-e > dnl) dnl = -e;
    end

    // each chain on its own: how far its taps sit from their nominal times
    single = 0.0;
    for (int k = 0; k < 8; k++) begin
      chain_max = 0.0;
      for (int i = 0; i < 32; i++) begin
        e = (tsw[k][i] - real'(k + 8 * i) * LSB) / LSB;
        if (e > chain_max) chain_max = e;
        if (-e > chain_max) chain_max = -e;
      end
      single += chain_max / 8.0;
    end
    $display("max |DNL| %0.2f LSB, max |INL| %0.2f LSB with 8 chains, %0.2f LSB per chain alone (mean)",
             dnl, inl8, single);
    check(inl8 < single, "averaging eight chains reduces the INL");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
