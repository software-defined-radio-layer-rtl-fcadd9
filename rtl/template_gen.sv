// template_gen: reference waveform for one PPM position of a TH-PPM chip.
//
// The receiver correlates each chip against two templates, one for a
// logical 0 and one for a logical 1. This block returns, for the sample
// index idx inside the current chip, the template sample at that index:
// the pulse shape uwb_pkg::PULSE placed at sample 0 (PPM_ONE = 0) or at
// sample tc/2 (PPM_ONE = 1), and zero elsewhere. It is purely
// combinational, so the template follows a new Tc at once.
//
// The two template generators follow the receiver diagram of the
// design; the pulse shape, the length of the pulse and the PPM shift of
// half a chip are this design's own choices.
module template_gen
  import uwb_pkg::*;
#(
  parameter bit PPM_ONE = 1'b0
) (
  input  logic [TC_W-1:0] idx,   // sample index inside the chip
  input  logic [TC_W-1:0] tc,    // chip duration in samples
  output coef_t           coef   // template sample at idx
);

  logic [TC_W-1:0] start;
  logic [TC_W-1:0] pos;

  always_comb begin
    start = PPM_ONE ? (tc >> 1) : '0;
    pos   = idx - start;
    coef  = '0;
    if (idx >= start && pos < TC_W'(PULSE_LEN))
      coef = PULSE[pos[$clog2(PULSE_LEN)-1:0]];
  end

endmodule
