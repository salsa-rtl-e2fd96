// salsa_pkg: sizes, word formats and the configuration record shared by the
// digital part of the SALSA readout chip.
//
// The chip digitises 64 channels with 12-bit SAR ADCs and passes the samples
// through a chain of per-channel and cross-channel corrections before zero
// suppression, optional peak feature extraction, buffering and serial output
// on 1 to 4 links. Channel count, ADC resolution and link count follow the
// published specification; the timestamp width, word layout and register
// fields are choices of this design.
package salsa_pkg;

  localparam int unsigned NCH     = 64;  // channels (specification)
  localparam int unsigned ADC_W   = 12;  // ADC resolution (specification)
  localparam int unsigned NLINK   = 4;   // 1 Gb/s data links (specification)
  localparam int unsigned SW      = 14;  // signed sample width after pedestal subtraction
  localparam int unsigned TS_W    = 16;  // sample timestamp width
  localparam int unsigned CH_W    = 6;   // channel number field
  localparam int unsigned WID_W   = 8;   // pulse width field (samples)
  localparam int unsigned MULT_W  = 7;   // multiplicity field of a trigger primitive

  // One output word: a zero-suppressed sample (feat=0, width=0) or the
  // features of one pulse (feat=1): amplitude of the peak, timestamp of the
  // first sample above threshold, number of samples above threshold.
  typedef struct packed {
    logic [CH_W-1:0]  ch;
    logic             feat;
    logic [TS_W-1:0]  ts;
    logic [ADC_W-1:0] amp;
    logic [WID_W-1:0] width;
  } hit_t;

  localparam int unsigned HIT_W = $bits(hit_t);  // 43 bits

  // Trigger primitive: timestamp of the sample and number of channels seen
  // above the seed threshold in it.
  typedef struct packed {
    logic [TS_W-1:0]   ts;
    logic [MULT_W-1:0] mult;
  } prim_t;

  localparam int unsigned PRIM_W = $bits(prim_t);  // 23 bits

  // Settings held by the slow-control registers (pedestals are kept apart,
  // one per channel).
  typedef struct packed {
    logic             polarity;   // 1: negative input signals, sample inverted
    logic             cmn_en;     // common mode correction on
    logic             bl_en;      // baseline following on
    logic             feat_mode;  // 1: send pulse features, 0: send samples
    logic             trig_mode;  // 1: triggered readout, 0: continuous
    logic [3:0]       bl_shift;   // baseline following time constant, 2^k samples
    logic [3:0]       iir_shift;  // IIR filter time constant, 2^k samples, 0 = off
    logic [ADC_W-1:0] zs_thr;     // zero suppression threshold
    logic [ADC_W-1:0] bl_thr;     // baseline follows only samples within +-bl_thr
    logic [ADC_W-1:0] seed_thr;   // trigger seed threshold
    logic [MULT_W-1:0] mult_thr;  // trigger primitive multiplicity, 0 = off
    logic [7:0]       trig_lat;   // trigger latency, samples
    logic [7:0]       trig_win;   // trigger window length, samples
    logic [NLINK-1:0] link_en;    // active data links
    logic [7:0]       clk_div;    // core clocks per sample
    logic [1:0]       fe_gain;    // front-end charge range (4 values)
    logic [2:0]       fe_tpeak;   // front-end peaking time (8 values)
    logic             fe_big_in;  // add the 6 mm input transistor
  } cfg_t;

endpackage
