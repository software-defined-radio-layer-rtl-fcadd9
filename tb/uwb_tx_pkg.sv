// uwb_tx_pkg: behavioural model of the TH-PPM emitter, channel and ADC,
// used by the testbenches to build received sample streams.
//
// A frame has nc chips of tc samples. Only chip code_chip carries a pulse:
// the shape uwb_pkg::PULSE scaled by amp, at sample 0 of the chip for a 0
// and at sample tc/2 for a 1. A preamble frame carries one pulse at sample
// 0 of chip 0. The channel is ideal apart from the additive noise the
// testbench adds per sample.
package uwb_tx_pkg;
  import uwb_pkg::*;

  function automatic void add_frame(ref longint q[$], input int tc, input int nc,
                                    input int code_chip, input bit data,
                                    input bit pre, input longint amp);
    for (int c = 0; c < nc; c++)
      for (int s = 0; s < tc; s++) begin
        longint v = 0;
        int     p;
        p = (pre || !data) ? s : s - tc / 2;
        if (c == (pre ? 0 : code_chip) && p >= 0 && p < PULSE_LEN)
          v = amp * longint'(PULSE[p]);
        q.push_back(v);
      end
  endfunction

  // uniform noise in [-a, a]
  function automatic longint noise(input int a);
    if (a == 0) return 0;
    return longint'($urandom_range(2 * a, 0)) - longint'(a);
  endfunction

endpackage
