// tdc_delay_line -- behavioural model of the carry-chain delay lines of one
// TDC channel. In the FPGA these are the dedicated carry-chain primitives,
// placed by hand, whose delays this model imitates; for synthesis the
// delays vanish and every tap is a wire from the input.
//
// The input edge enters N_CHAINS independent chains of TAPS taps; each
// chain spans one sampling period. Chain k starts k/(N_CHAINS*TAPS) of a
// period later than chain 0. With ideal elements (TAP_SPREAD = 0) tap i of
// chain k changes (k + N_CHAINS*i) fine steps after the input, one fine step
// being T_CLK_PS/(N_CHAINS*TAPS), so summing the taps reached in all chains
// gives a position with N_CHAINS*TAPS = 256 uniform steps per period.
// Real carry elements are not uniform. With TAP_SPREAD = s, every element
// delay is drawn from (1 +- s) times its nominal value by a fixed xorshift
// sequence started from SEED, and each chain is rescaled to span exactly one
// period. Then every chain alone is non-linear, and the sum over the chains
// averages their errors; this is the effect the paper relies on. The
// switching time of each tap is a constant (ttcd_pkg::tap_time); on every
// input change one process walks the taps in order of those times, setting
// each to the new level. An input change during a walk is missed, so the
// input must hold each level for longer than the line (about one period).
// The paper gives eight chains, 256 effective taps, a 440 MHz clock and
// non-uniform elements. This model's own choices: the split into 8 x 32
// taps, the staggered chain starts, and the form of the mismatch. The paper
// gives no mismatch size, so the default is ideal taps.
//
// Interface: sig (pad input), taps[k][i] (tap i of chain k, i = 0 nearest
// the input). The line starts empty (input low). Sample the taps with the
// 440 MHz clock (tdc_encoder). Tap 0 of chain 0 always switches first, at
// the input change itself.
`timescale 1ps/1fs
module tdc_delay_line
  import ttcd_pkg::*;
#(
  parameter int unsigned N_CHAINS   = 8,
  parameter int unsigned TAPS       = 32,
  parameter real         T_CLK_PS   = 2272.727,
  parameter real         TAP_SPREAD = 0.0,
  parameter int unsigned SEED       = 1
) (
  input  logic                               sig,
  output logic [N_CHAINS-1:0][TAPS-1:0]      taps
);
  localparam int NT = N_CHAINS * TAPS;
  typedef real times_t [NT];
  typedef int  order_t [NT];

  // switching time of every tap (tap i of chain k at k*TAPS+i), in ps after
  // the input change
  function automatic times_t all_times();
    times_t t;
    for (int k = 0; k < N_CHAINS; k++)
      for (int i = 0; i < TAPS; i++)
        t[k*TAPS+i] = tap_time(k, i, N_CHAINS, TAPS, T_CLK_PS, TAP_SPREAD, SEED);
    return t;
  endfunction

  // the taps sorted by switching time (insertion sort)
  function automatic order_t switch_order(times_t t);
    order_t o;
    int j, v;
    for (int m = 0; m < NT; m++) begin
      v = m;
      j = m;
      while (j > 0 && t[o[j-1]] > t[v]) begin
        o[j] = o[j-1];
        j--;
      end
      o[j] = v;
    end
    return o;
  endfunction

  localparam times_t T_SW  = all_times();
  localparam order_t ORDER = switch_order(T_SW);

  initial taps = '0;

  // one walk per input change; the input must hold its level longer than
  // the line (about one period), which the encoder requires anyway
  logic level;
  always @(sig) begin
    level = sig;
    for (int m = 0; m < NT; m++) begin
      if (m > 0) #(T_SW[ORDER[m]] - T_SW[ORDER[m-1]]);
      taps[ORDER[m] / TAPS][ORDER[m] % TAPS] = level;
    end
  end
endmodule
