// uwb_pkg: types and constants shared by the TH-PPM IR-UWB receiver.
//
// The receiver works on one ADC sample per clock. Time is counted in
// samples: a chip (slot) lasts Tc samples, a frame holds Nc chips, and
// one pulse per frame is sent in the chip chosen by the time-hopping (TH)
// code. Within its chip the pulse sits at sample 0 for a logical 0 and at
// sample Tc/2 for a logical 1 (binary pulse position modulation).
//
// The 64-bit sample word follows the "sample size" of the reconfigurable
// TH-PPM versions of the design. The 8-bit widths of Tc, Nc and the code
// values, the 16-bit frame duration, the 4-sample pulse shape and the
// 8-entry code memory are this design's own choices.
package uwb_pkg;

  parameter int SAMPLE_W  = 64;  // received sample word
  parameter int TC_W      = 8;   // chip duration Tc, in samples
  parameter int NC_W      = 8;   // chips per frame Nc
  parameter int TF_W      = 16;  // frame duration Tf, in samples
  parameter int CODE_W    = 8;   // one TH-code value: a chip index
  parameter int CODE_LEN  = 8;   // TH-code period, in frames
  parameter int TPL_W     = 8;   // template coefficient width
  parameter int PULSE_LEN = 4;   // pulse length, in samples

  // Pulse shape used by the templates and the matched filter: a sampled
  // monocycle. Its autocorrelation is 106 at lag 0 and negative at every
  // other lag, so the matched filter output peaks only on alignment.
  typedef logic signed [TPL_W-1:0] coef_t;
  parameter coef_t PULSE [PULSE_LEN] = '{8'sd2, 8'sd7, -8'sd7, -8'sd2};

  // Delay, in samples, of the stream the correlators see against the
  // stream the synchroniser sees (see sample_delay and sync_filter).
  parameter int SYNC_DELAY = 2 * PULSE_LEN;

  // Matched filter output width: a sum of PULSE_LEN sample x coef products.
  parameter int MF_W = SAMPLE_W + TPL_W + $clog2(PULSE_LEN) + 1;

  // Correlator accumulator width: up to 2**TC_W sample x coef products.
  parameter int ACC_W = SAMPLE_W + TPL_W + TC_W;

  // Shortest chip that keeps the bit-0 and bit-1 pulse positions apart.
  parameter int TC_MIN = 2 * PULSE_LEN;

  // Parameters the MAC layer may change while the receiver runs.
  typedef struct packed {
    logic [TF_W-1:0] tf;
    logic [NC_W-1:0] nc;
    logic [TC_W-1:0] tc;
  } rx_cfg_t;

  // Configuration in force after reset: 16 samples per chip, 8 chips per frame.
  parameter rx_cfg_t CFG_RESET = '{tf: TF_W'(128), nc: NC_W'(8), tc: TC_W'(16)};

endpackage
