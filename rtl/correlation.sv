// correlation: double correlator of the TH-PPM receiver, with chip timer.
//
// Each received sample is multiplied by the bit-0 template and by the
// bit-1 template (two template_gen instances) and the products are summed
// over one chip of Tc samples. The chip timer counts the sample index
// inside the chip: it is started by the start mark of the synchroniser
// and then wraps every tc samples, so the chip duration Tc set by the MAC
// layer directly sets the chip rate.
//
// Timing: chip_end is high, combinationally, in the cycle of the last
// sample of a chip. One cycle later done_tc is high for one cycle and
// corr0/corr1 hold the two sums of that chip until the next done_tc.
// tc is read at every sample and must change only at a chip boundary;
// it must be at least TC_MIN. All state moves only on cycles with en high
// (done_tc is cleared on other cycles).
//
// Correlation against two templates over a chip follows the design; the
// template alignment and the integrate-and-dump timing are this design's.
module correlation
  import uwb_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       en,
  input  logic                       start,   // current sample is sample 0 of a chip
  input  logic signed [SAMPLE_W-1:0] sample,
  input  logic [TC_W-1:0]            tc,
  output logic [TC_W-1:0]            idx,     // sample index of the current sample
  output logic                       running,
  output logic                       chip_end,
  output logic                       done_tc,
  output logic signed [ACC_W-1:0]    corr0,
  output logic signed [ACC_W-1:0]    corr1
);

  logic [TC_W-1:0]         cnt;      // index of the next sample
  logic                    active;   // the current sample belongs to a chip
  coef_t                   t0, t1;
  logic signed [ACC_W-1:0] acc0, acc1, sum0, sum1;

  template_gen #(.PPM_ONE(1'b0)) u_tpl0 (.idx(idx), .tc(tc), .coef(t0));
  template_gen #(.PPM_ONE(1'b1)) u_tpl1 (.idx(idx), .tc(tc), .coef(t1));

  always_comb begin
    idx      = start ? '0 : cnt;
    active   = start || running;
    chip_end = en && active && idx == tc - 1'b1;
    // a chip's sum starts afresh at sample 0
    sum0 = ACC_W'(sample) * ACC_W'(t0) + ((idx == '0) ? ACC_W'(0) : acc0);
    sum1 = ACC_W'(sample) * ACC_W'(t1) + ((idx == '0) ? ACC_W'(0) : acc1);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt     <= '0;
      running <= 1'b0;
      acc0    <= '0;
      acc1    <= '0;
      corr0   <= '0;
      corr1   <= '0;
      done_tc <= 1'b0;
    end else begin
      done_tc <= chip_end;
      if (en && active) begin
        running <= 1'b1;
        acc0    <= sum0;
        acc1    <= sum1;
        cnt     <= chip_end ? '0 : idx + 1'b1;
        if (chip_end) begin
          corr0 <= sum0;
          corr1 <= sum1;
        end
      end
    end
  end

endmodule
