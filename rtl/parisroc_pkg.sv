// parisroc_pkg: constants and types shared by the digital part of the
// 16-channel photomultiplier readout chip.
//
// The sizes follow the chip description: 16 independent channels, an
// analogue memory (switched capacitor array) of depth 2 per channel, a 24-bit
// coarse time counter, 12-bit charge and fine-time conversions, and a 52-bit
// readout word made of channel number, timestamp, charge and fine time.
// The field order inside the word is the order in which the description
// lists them; the bit order on the serial wire (MSB of the word first) is a
// choice of this design.
package parisroc_pkg;

  localparam int unsigned N_CH      = 16;  // analogue channels
  localparam int unsigned CH_W      = 4;   // channel number field
  localparam int unsigned SCA_DEPTH = 2;   // track-and-hold cells per channel
  localparam int unsigned TS_W      = 24;  // coarse timestamp counter
  localparam int unsigned ADC_W     = 12;  // Wilkinson ADC resolution
  localparam int unsigned WORD_W    = CH_W + TS_W + 2 * ADC_W;  // 52

  // Clock ratio between the 40 MHz conversion clock and the 10 MHz
  // timestamp / readout rate.
  localparam int unsigned CLK_RATIO = 4;

  // One readout word, most significant field first.
  typedef struct packed {
    logic [CH_W-1:0]  channel;
    logic [TS_W-1:0]  timestamp;
    logic [ADC_W-1:0] charge;
    logic [ADC_W-1:0] fine_time;
  } readout_word_t;

  // Slow control settings, first field shifted in last (it ends up at the
  // most significant end of the register). The fields are the settings the
  // chip description names; their order and the shaping-time encoding are
  // choices of this design.
  typedef struct packed {
    logic [3:0]             gain_common;   // variable gain, common to all
    logic [N_CH-1:0][7:0]   gain_corr;     // per-channel gain correction
    logic [1:0]             shaper_tau;    // 0: 50 ns, 1: 100 ns, 2: 200 ns
    logic [9:0]             dac_thr_a;     // threshold, discriminator A
    logic [9:0]             dac_thr_b;     // threshold, discriminator B
    logic [N_CH-1:0][3:0]   dac_adj;       // per-channel 4-bit adjustment
    logic                   trig_sel_b;    // trigger mux: 1 = discri. B
  } sc_config_t;

  localparam int unsigned SC_W = $bits(sc_config_t);  // 219

  // State of the top-level sequencer.
  typedef enum logic [1:0] {
    TM_IDLE    = 2'd0,
    TM_CONVERT = 2'd1,
    TM_READOUT = 2'd2
  } tm_state_t;

endpackage
