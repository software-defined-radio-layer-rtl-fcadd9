// sync_filter: matched-filter synchronisation of the TH-PPM receiver.
//
// The coherent receiver must know where chips begin before it can
// correlate. This block runs the incoming samples through a filter
// matched to the pulse shape, y(t) = sum_i PULSE[i] * x(t-PULSE_LEN+1+i),
// and hunts for the first output above the threshold thr. From that
// sample it watches PULSE_LEN outputs, keeps the largest, and takes its
// position as the end of the first received pulse. That pulse is taken
// to be at sample 0 of chip 0 of a preamble frame.
//
// The correlators see the stream SYNC_DELAY samples later (sample_delay),
// so the block can raise start in the very cycle in which the first
// sample of that pulse leaves the delay line. start is a one-cycle mark
// in the delayed time base; synced stays high from then on until reset
// or resync. All state moves only on cycles with en high.
//
// Timing: with the threshold first crossed at enabled sample t0 and the
// peak found at t0+k, start rises at enabled sample t0+k+SYNC_DELAY-PULSE_LEN+1.
//
// The use of a matched filter follows the design; the threshold search,
// the peak window, the delay and the preamble pulse are this design's own.
module sync_filter
  import uwb_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       en,      // one sample per enabled cycle
  input  logic                       resync,  // drop lock and hunt again
  input  logic signed [SAMPLE_W-1:0] sample,
  input  logic signed [MF_W-1:0]     thr,     // detection threshold on y
  output logic signed [MF_W-1:0]     mf_out,  // matched filter output y
  output logic                       start,   // chip 0 starts (delayed time base)
  output logic                       synced
);

  typedef enum logic [1:0] {HUNT, PEAK, WAIT, LOCK} state_t;

  localparam int CW = $clog2(SYNC_DELAY + PULSE_LEN) + 1;

  state_t                      state;
  logic signed [SAMPLE_W-1:0]  win [PULSE_LEN-1];  // win[0] is the newest stored sample
  logic signed [MF_W-1:0]      best;
  logic [CW-1:0]               cnt;
  logic [CW-1:0]               kpk;
  logic [CW-1:0]               kfin;

  // matched filter over the stored samples and the current one
  always_comb begin
    mf_out = MF_W'(PULSE[PULSE_LEN-1]) * MF_W'(sample);
    for (int i = 0; i < PULSE_LEN - 1; i++)
      mf_out += MF_W'(PULSE[PULSE_LEN-2-i]) * MF_W'(win[i]);
  end

  assign kfin  = (mf_out > best) ? cnt : kpk;
  assign start = en && state == WAIT && cnt == '0;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < PULSE_LEN - 1; i++) win[i] <= '0;
      state  <= HUNT;
      best   <= '0;
      cnt    <= '0;
      kpk    <= '0;
      synced <= 1'b0;
    end else if (resync) begin
      state  <= HUNT;
      synced <= 1'b0;
    end else if (en) begin
      win[0] <= sample;
      for (int i = 1; i < PULSE_LEN - 1; i++) win[i] <= win[i-1];
      unique case (state)
        HUNT: if (mf_out > thr) begin
          best  <= mf_out;
          kpk   <= '0;
          cnt   <= CW'(1);
          state <= PEAK;
        end
        PEAK: begin
          if (mf_out > best) begin
            best <= mf_out;
            kpk  <= cnt;
          end
          if (cnt == CW'(PULSE_LEN - 1)) begin
            // wait so that start meets the pulse start in the delayed stream
            cnt   <= kfin + CW'(SYNC_DELAY + 1 - 2 * PULSE_LEN);
            state <= WAIT;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        WAIT: if (cnt == '0) begin
          state  <= LOCK;
          synced <= 1'b1;
        end else begin
          cnt <= cnt - 1'b1;
        end
        LOCK: ;
        default: state <= HUNT;
      endcase
    end
  end

endmodule
