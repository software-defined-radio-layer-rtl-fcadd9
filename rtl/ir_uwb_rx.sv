// ir_uwb_rx: data-rate and TH-code reconfigurable TH-PPM IR-UWB receiver.
//
// Digital back end of an impulse-radio UWB receiver, from ADC samples to
// data bits. One sample enters per cycle with enable high. A matched
// filter (sync_filter) finds the first pulse and so the chip grid; the
// double correlator (correlation) then integrates every chip of Tc
// samples against the bit-0 and bit-1 PPM templates, the decision block
// picks the larger, and the time-hopping discrimination keeps the bit of
// the one chip per frame that the TH code names. The TH-code management
// supplies that code from memory. Tf, Nc, Tc and the TH code come from
// the MAC layer and are switched in, at a frame boundary, by the
// reconfiguration signal reconf, so both the data rate 1/(Nc*Tc) and
// the code can change while bits are being received.
//
// Latency: a data bit leaves on rx_bit/rx_valid three clock cycles after
// the cycle in which the input sample SYNC_DELAY places after the last
// sample of its chip is taken (that is when the chip's last sample leaves
// the delay line; then the correlation, decision and discrimination
// registers). The three registers run on every clock, whatever enable does.
//
// enable gates the sample path (delay line, synchroniser, correlator and
// the chip and frame counters that follow chip_end); the decision and
// discrimination registers and the code and setting registers run on
// every clock, so that the latency above stays fixed.
//
// The block structure (correlation with two templates, matched-filter
// synchronisation, decision, TH discrimination, TH-code management, and
// Tf/Nc/Tc/TH-code inputs with a reconfiguration signal) follows the
// design. The widths, the pulse shape, the preamble frame and all timing
// rules are this design's own; see the comments of each block.
module ir_uwb_rx
  import uwb_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       enable,      // a new sample is on sample
  input  logic signed [SAMPLE_W-1:0] sample,      // ADC sample
  input  logic signed [MF_W-1:0]     sync_thr,    // synchronisation threshold
  input  logic                       resync,      // restart reception
  // MAC layer side
  input  logic                       reconf,      // reconfiguration signal
  input  logic [TF_W-1:0]            tf,
  input  logic [NC_W-1:0]            nc,
  input  logic [TC_W-1:0]            tc,
  input  logic                       code_restart,
  input  logic                       code_load,
  input  logic [CODE_W-1:0]          code_in,
  // status
  output logic                       synced,
  output logic signed [MF_W-1:0]     mf_out,       // matched filter, to set sync_thr
  output logic [TC_W-1:0]            sample_idx,   // index in chip of the correlated sample
  output logic                       running,
  output rx_cfg_t                    cfg,
  output logic                       cfg_pending,
  output logic                       cfg_error,
  output logic                       code_complete,
  output logic                       reconfigured, // a new setting took effect
  output logic                       code_swapped, // a new TH code took effect
  output logic                       frame_end,
  output logic                       preamble,     // in the preamble frame
  output logic [NC_W-1:0]            chip_cnt,
  output logic [$clog2(CODE_LEN)-1:0] code_idx,
  // data out
  output logic                       rx_bit,
  output logic                       rx_valid
);

  logic signed [SAMPLE_W-1:0] sample_d;
  logic                       start;
  logic                       chip_end, done_tc;
  logic signed [ACC_W-1:0]    corr0, corr1;
  logic                       dec_bit, dec_valid;
  logic                       code_step, apply;
  logic                       rx_rst;

  // resync restarts reception: the chip grid, decisions and counters are
  // cleared until the synchroniser finds the next preamble. The setting
  // and the TH codes are kept.
  assign rx_rst = rst || resync;
  logic [CODE_W-1:0]          code;

  sample_delay #(.W(SAMPLE_W), .DEPTH(SYNC_DELAY)) u_delay (
    .clk, .rst, .en(enable), .din(sample), .dout(sample_d));

  sync_filter u_sync (
    .clk, .rst, .en(enable), .resync, .sample, .thr(sync_thr),
    .mf_out, .start, .synced);

  correlation u_corr (
    .clk, .rst(rx_rst), .en(enable), .start, .sample(sample_d), .tc(cfg.tc),
    .idx(sample_idx), .running, .chip_end, .done_tc, .corr0, .corr1);

  decision u_dec (
    .clk, .rst(rx_rst), .done_tc, .corr0, .corr1, .bit_out(dec_bit), .bit_valid(dec_valid));

  th_discrimination u_discri (
    .clk, .rst(rx_rst), .start, .chip_end, .nc(cfg.nc), .code,
    .bit_in(dec_bit), .bit_valid(dec_valid),
    .chip_cnt, .preamble, .frame_end, .code_step, .rx_bit, .rx_valid);

  th_code_mgmt u_code (
    .clk, .rst, .load_restart(code_restart), .load(code_load), .load_code(code_in),
    .apply, .step(code_step), .start, .code, .code_idx, .complete(code_complete),
    .swapped(code_swapped));

  reconfig_regs u_reconf (
    .clk, .rst, .reconf, .tf, .nc, .tc, .running, .frame_end,
    .cfg, .apply, .pending(cfg_pending), .cfg_error);

  always_ff @(posedge clk) begin
    if (rst) reconfigured <= 1'b0;
    else     reconfigured <= apply;
  end

endmodule
