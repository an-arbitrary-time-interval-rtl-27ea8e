// tig_pkg: types and constants shared by the vernier-clock time interval
// generator.
//
// The generator runs two 13-bit rotational counters on two clocks whose
// frequencies differ by the ratio 4095/4096. Both counters are set to
// INIT_VALUE (4096) at a moment when the two clocks are nearly aligned; the
// slow counter then cycles through CNT1_MIN..CNT1_MAX (8190 states) and the
// fast one through CNT2_MIN..CNT2_MAX (8192 states), so that both return to
// 4096 together every 8190 slow periods.
//
// The counter width (13 bits), the initial value and both count ranges are
// the published ones. The default 16-entry sequencer table is this design's
// own choice: only the spacing of its points (32 to 256 fine steps) is
// published, not the values themselves.
package tig_pkg;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned CNT_W      = 13;
  localparam int unsigned INIT_VALUE = 4096;
  localparam int unsigned CNT1_MIN   = 1;
  localparam int unsigned CNT1_MAX   = 8190;
  localparam int unsigned CNT2_MIN   = 0;
  localparam int unsigned CNT2_MAX   = 8191;

  typedef logic [CNT_W-1:0] cnt_t;

  // One pair of comparator constants: channel 1 fires when CNT1x = n1,
  // channel 2 when CNT2x = n2.
  typedef struct packed {
    cnt_t n1;
    cnt_t n2;
  } setting_t;

  localparam int unsigned NUM_POINTS = 16;
  typedef setting_t setting_table_t [NUM_POINTS];

  // Default sequencer table. N2 - N1 = 1 throughout, so every point is a
  // pure fine adjustment: moving N1 and N2 up together by k shortens
  // T2 - T1 by k * (1/f1 - 1/f2). Successive points are 32 to 256 fine steps
  // apart.
  localparam setting_table_t DEFAULT_TABLE = '{
    '{n1: 13'd7274, n2: 13'd7275},
    '{n1: 13'd7018, n2: 13'd7019},
    '{n1: 13'd6762, n2: 13'd6763},
    '{n1: 13'd6506, n2: 13'd6507},
    '{n1: 13'd6378, n2: 13'd6379},
    '{n1: 13'd6282, n2: 13'd6283},
    '{n1: 13'd6186, n2: 13'd6187},
    '{n1: 13'd6090, n2: 13'd6091},
    '{n1: 13'd6026, n2: 13'd6027},
    '{n1: 13'd5962, n2: 13'd5963},
    '{n1: 13'd5898, n2: 13'd5899},
    '{n1: 13'd5834, n2: 13'd5835},
    '{n1: 13'd5802, n2: 13'd5803},
    '{n1: 13'd5770, n2: 13'd5771},
    '{n1: 13'd5738, n2: 13'd5739},
    '{n1: 13'd5482, n2: 13'd5483}
  };

  // Divider settings of the two-stage PLL cascade (see cascaded_pll).
  // f_out = f_in * M / (N * C) for each PLL.
  typedef struct packed {
    int unsigned s1_n, s1_m, s1_c0, s1_c1;  // first stage, outputs 0 and 1
    bit          fast_src;                 // 0: fed from stage-1 output 0, 1: output 1
    int unsigned fast_n, fast_m, fast_c;    // second stage making ck2x (fast)
    bit          slow_src;
    int unsigned slow_n, slow_m, slow_c;    // second stage making ck1x (slow)
  } pll_cfg_t;

  // Cyclone 10, 40 MHz reference: PLL601 -> CK10, CK262; PLL605 -> CK320;
  // PLL604 -> CK319. f2 = 320 MHz, f1 = 319.921875 MHz, f1/f2 = 4095/4096.
  localparam pll_cfg_t PLL_CFG_C10 = '{
    s1_n: 4, s1_m: 105, s1_c0: 105, s1_c1: 4,
    fast_src: 1'b0, fast_n: 1, fast_m: 128, fast_c: 4,
    slow_src: 1'b1, slow_n: 8, slow_m: 39,  slow_c: 4};

  // Cyclone 5, 50 MHz reference: PLL402 -> CK152; PLL414 -> CK251 (fast);
  // PLL413 -> CK250 (slow).
  localparam pll_cfg_t PLL_CFG_C5 = '{
    s1_n: 3, s1_m: 64, s1_c0: 7, s1_c1: 0,
    fast_src: 1'b0, fast_n: 13, fast_m: 64,  fast_c: 3,
    slow_src: 1'b0, slow_n: 16, slow_m: 105, slow_c: 4};
endpackage
