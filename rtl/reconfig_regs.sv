// reconfig_regs: PHY-side registers for the reconfigurable parameters.
//
// The MAC layer places new values of the frame duration Tf, the number
// of chips per frame Nc and the chip duration Tc on the PHY inputs and
// then pulses reconf. The data rate is one bit per frame, 1/(Nc*Tc), so a
// new Tc or Nc changes the rate while the receiver keeps running.
//
// On reconf the new set is checked and, if good, held as pending; a bad
// set (Tf other than Nc*Tc, Tc below TC_MIN, Nc of zero) is refused and
// raises cfg_error until the next good set. A pending set is applied at
// the next frame boundary (frame_end, the last sample of a frame) so that
// no frame mixes two settings; while the receiver is not running it is
// applied at once. apply is high, combinationally, in the cycle the set
// is taken, and the TH-code management swaps its code in the same cycle.
// cfg changes at the clock edge that ends that cycle. Reset loads
// CFG_RESET.
//
// Tf, Nc, Tc as receiver inputs and the reconfiguration signal follow the
// design; the check, the pending register and the frame-boundary rule are
// this design's own.
module reconfig_regs
  import uwb_pkg::*;
(
  input  logic            clk,
  input  logic            rst,
  input  logic            reconf,
  input  logic [TF_W-1:0] tf,
  input  logic [NC_W-1:0] nc,
  input  logic [TC_W-1:0] tc,
  input  logic            running,
  input  logic            frame_end,
  output rx_cfg_t         cfg,
  output logic            apply,
  output logic            pending,
  output logic            cfg_error
);

  rx_cfg_t pend;
  logic    good;

  assign good  = 32'(nc) * 32'(tc) == 32'(tf) && tc >= TC_W'(TC_MIN) && nc != '0;
  assign apply = pending && (frame_end || !running);

  always_ff @(posedge clk) begin
    if (rst) begin
      cfg       <= CFG_RESET;
      pend      <= CFG_RESET;
      pending   <= 1'b0;
      cfg_error <= 1'b0;
    end else begin
      if (apply) begin
        cfg     <= pend;
        pending <= 1'b0;
      end
      if (reconf) begin
        if (good) begin
          pend      <= '{tf: tf, nc: nc, tc: tc};
          pending   <= 1'b1;
          cfg_error <= 1'b0;
        end else begin
          cfg_error <= 1'b1;
        end
      end
    end
  end

endmodule
