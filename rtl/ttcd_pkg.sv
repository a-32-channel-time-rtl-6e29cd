// ttcd_pkg -- widths, types and word formats shared by the 32-channel
// time-tagging and coincidence unit.
//
// Time is counted in tag LSBs: one period of the 440 MHz sampling clock is
// split into 256 fine steps (about 8.9 ps). A time-tag is a 47-bit coarse
// count of sampling-clock cycles followed by the 8-bit fine code, 55 bits
// in all, which wraps after about 3.7 days. The channel count (32), the
// 256 fine steps, the 8 pattern registers and the 2.5 us window limit follow
// the paper; the coarse width, the offset, dead-time and threshold widths,
// the run-mode encoding and the 64-bit output word layout are this design's
// own choices.
`timescale 1ps/1fs
package ttcd_pkg;

  localparam int unsigned N_CH        = 32;   // input channels
  localparam int unsigned CH_BITS     = 5;
  localparam int unsigned FINE_BITS   = 8;    // 256 effective taps
  localparam int unsigned COARSE_BITS = 47;
  localparam int unsigned TAG_BITS    = COARSE_BITS + FINE_BITS;
  localparam int unsigned OFFSET_BITS = 20;   // per-channel offset, tag LSBs
  localparam int unsigned DEAD_BITS   = 20;   // per-channel dead time, tag LSBs
  localparam int unsigned WINDOW_BITS = 19;   // coincidence window, tag LSBs
  // 2.5 us at 440 MHz x 256 = 1100 cycles x 256 steps
  localparam int unsigned WINDOW_MAX  = 281600;
  localparam int unsigned THRESH_BITS = 6;
  localparam int unsigned N_PATTERNS  = 8;

  typedef logic [TAG_BITS-1:0] tag_t;
  typedef logic [CH_BITS-1:0]  chan_t;

  // one time-tag bundled with its channel number
  typedef struct packed {
    chan_t ch;
    tag_t  tag;
  } chan_tag_t;

  // one coincidence vector with the tag of the hit that opened its window
  typedef struct packed {
    logic [N_CH-1:0] vec;
    tag_t            tag;
  } coinc_t;

  typedef enum logic [1:0] {
    MODE_TIMETAG  = 2'd0,   // every time-tag is sent
    MODE_COINC    = 2'd1,   // coincidence vectors only
    MODE_COINC_TS = 2'd2    // coincidence vectors with their time-tag
  } run_mode_e;

  // 64-bit output word: [63:60] type, rest depends on the type
  //   W_TAG    [59:55] channel, [54:0] tag
  //   W_COINC  [31:0]  vector
  //   W_COINC_TS [31:0] vector, followed by one W_TIME word
  //   W_TIME   [54:0]  tag
  //   W_REG    [47:32] register address, [31:0] register value
  //   W_STATUS [59:47] dropped tags (saturating), [46:0] coarse time
  typedef enum logic [3:0] {
    W_TAG      = 4'h1,
    W_COINC    = 4'h2,
    W_COINC_TS = 4'h3,
    W_TIME     = 4'h4,
    W_REG      = 4'hE,
    W_STATUS   = 4'hF
  } word_type_e;

  // register map of the control unit (word addresses)
  localparam logic [15:0] REG_CTRL      = 16'h0000; // [0] run [1] test [3:2] mode
  localparam logic [15:0] REG_WINDOW    = 16'h0001;
  localparam logic [15:0] REG_THRESHOLD = 16'h0002;
  localparam logic [15:0] REG_STATUS_P  = 16'h0003;
  localparam logic [15:0] REG_CH_EN     = 16'h0004;
  localparam logic [15:0] REG_FALLING   = 16'h0005;
  localparam logic [15:0] REG_PATTERN   = 16'h0010; // +0..7
  localparam logic [15:0] REG_OFFSET    = 16'h0020; // +0..31
  localparam logic [15:0] REG_DEAD      = 16'h0040; // +0..31

  // every programmable setting of the unit
  typedef struct packed {
    logic                                 run;
    logic                                 test_en;
    run_mode_e                            mode;
    logic [WINDOW_BITS-1:0]               window;
    logic [THRESH_BITS-1:0]               threshold;
    logic [31:0]                          status_period;
    logic [N_CH-1:0]                      ch_en;
    logic [N_CH-1:0]                      falling;
    logic [N_PATTERNS-1:0][N_CH-1:0]      pattern;
    logic [N_CH-1:0][OFFSET_BITS-1:0]     offset;
    logic [N_CH-1:0][DEAD_BITS-1:0]       dead;
  } cfg_t;

  // switching time, in ps after the input change, of tap i of chain k in a
  // TDC delay line (tdc_delay_line). Chain k starts k fine steps late; its
  // element delays are 1 +- spread times nominal, drawn from a xorshift
  // sequence started at seed, and scaled so that the chain spans t_clk.
  function automatic real tap_time(int k, int i, int n_chains, int taps, real t_clk,
                                   real spread, int unsigned seed);
    int unsigned x;
    real d, total, part;
    x = seed | 1;
    for (int n = 0; n < k * taps; n++) begin
      x = x ^ (x << 13);
      x = x ^ (x >> 17);
      x = x ^ (x << 5);
    end
    total = 0.0;
    part  = 0.0;
    for (int j = 0; j < taps; j++) begin
      x = x ^ (x << 13);
      x = x ^ (x >> 17);
      x = x ^ (x << 5);
      d = 1.0 + spread * (2.0 * (real'(x) / 4294967296.0) - 1.0);
      total = total + d;
      if (j < i) part = part + d;
    end
    return real'(k) * t_clk / real'(n_chains * taps) + part * t_clk / total;
  endfunction

endpackage
