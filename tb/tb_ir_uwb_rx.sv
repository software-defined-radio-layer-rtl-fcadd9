// tb_ir_uwb_rx: end-to-end test of the reconfigurable TH-PPM receiver
// at its default parameters.
//
// A behavioural emitter/channel/ADC (uwb_tx_pkg) builds the sample
// stream: silence, a preamble frame, then data frames, one random bit
// each at the chip named by the TH code, with additive noise. The stream
// is fed with random enable gaps (stalls). While it runs, the testbench
// acts as the MAC layer:
//   during data frame 2  a set with Tf != Nc*Tc        -> refused, cfg_error
//   during data frame 5  Tc 16 -> 20, no new code      -> rate change only
//   during data frame 9  new code B, Nc 6, Tc 24       -> rate and code change
//   during data frame 17 new code C, Nc 8, Tc 8 (TC_MIN)
//   after the last frame  resync, then a second transmission (preamble
//                         and NFRAMES2 frames, code C from entry 0)
// The emitter switches at the frame after each request, as the receiver
// must. Every received bit is compared with the bit sent, and its
// arrival cycle with the cycle at which the last sample of its chip left
// the delay line plus three (correlation, decision, discrimination).
// Each mechanism above is counted and must occur.
module tb_ir_uwb_rx;
  import uwb_pkg::*;
  import uwb_tx_pkg::*;

  localparam int NFRAMES1 = 28;               // first transmission
  localparam int NFRAMES2 = 6;                // after resync
  localparam int NFRAMES = NFRAMES1 + NFRAMES2;
  localparam longint AMP = 1000;
  localparam int NOISE = 60;

  logic clk = 0, rst = 1, enable = 0, resync = 0;
  logic signed [SAMPLE_W-1:0] sample = '0;
  logic signed [MF_W-1:0]     sync_thr = MF_W'(50000);
  logic reconf = 0, code_restart = 0, code_load = 0;
  logic [TF_W-1:0] tf = '0;
  logic [NC_W-1:0] nc = '0;
  logic [TC_W-1:0] tc = '0;
  logic [CODE_W-1:0] code_in = '0;
  logic synced, running;
  logic signed [MF_W-1:0] mf_out;
  logic [TC_W-1:0] sample_idx;
  logic cfg_pending, cfg_error, code_complete, reconfigured, code_swapped;
  logic frame_end, preamble, rx_bit, rx_valid;
  rx_cfg_t cfg;
  logic [NC_W-1:0] chip_cnt;
  logic [$clog2(CODE_LEN)-1:0] code_idx;

  ir_uwb_rx dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish();
  end

  // ---------------------------------------------------------------- stream
  typedef struct {int nc; int tc; int code_set;} seg_t;
  logic [CODE_W-1:0] codes [4][CODE_LEN];
  longint q[$];
  int     frame_start[NFRAMES];
  int     bit_end[NFRAMES];   // index of the last sample of each coded chip
  bit     bits[NFRAMES];
  int     pres_cyc[$];        // cycle at which each sample was presented
  int     t = 0;              // samples presented so far
  int     gap_start;          // first sample after the first transmission

  function automatic seg_t seg_of(int f);
    if (f < 6)  return '{8, 16, 0};
    if (f >= NFRAMES1) return '{8, 8, 3};   // second transmission, code C
    if (f < 10) return '{8, 20, 0};
    if (f < 18) return '{6, 24, 1};
    return '{8, 8, 2};
  endfunction

  function automatic void build();
    int cidx = 0;
    int prev_set = 0;
    for (int s = 0; s < 3; s++)
      for (int i = 0; i < CODE_LEN; i++)
        codes[s][i] = CODE_W'($urandom_range(s == 1 ? 5 : 7, 0));
    codes[3] = codes[2];
    for (int i = 0; i < 37; i++) q.push_back(0);
    add_frame(q, 16, 8, 0, 0, 1, AMP);                 // preamble
    for (int f = 0; f < NFRAMES; f++) begin
      seg_t sg = seg_of(f);
      int   c;
      if (f == NFRAMES1) begin
        // end of the first transmission: flush, silence, second preamble
        for (int i = 0; i < 4 * SYNC_DELAY; i++) q.push_back(0);
        gap_start = q.size();
        for (int i = 0; i < 40; i++) q.push_back(0);
        add_frame(q, 8, 8, 0, 0, 1, AMP);
      end
      if (sg.code_set != prev_set) cidx = 0;           // new code starts at entry 0
      prev_set = sg.code_set;
      c = int'(codes[sg.code_set][cidx]);
      bits[f] = 1'($urandom_range(1, 0));
      frame_start[f] = q.size();
      bit_end[f] = q.size() + c * sg.tc + sg.tc - 1;
      add_frame(q, sg.tc, sg.nc, c, bits[f], 0, AMP);
      cidx = (cidx + 1) % CODE_LEN;
    end
    for (int i = 0; i < 4 * SYNC_DELAY; i++) q.push_back(0);
    foreach (q[i]) q[i] += noise(NOISE);
  endfunction

  // ------------------------------------------------------------ MAC side
  task automatic mac_load(int s);
    @(negedge clk); code_restart = 1;
    @(negedge clk); code_restart = 0;
    for (int i = 0; i < CODE_LEN; i++) begin
      @(negedge clk); code_load = 1; code_in = codes[s][i];
    end
    @(negedge clk); code_load = 0;
  endtask

  task automatic mac_reconf(int ncv, int tcv, int tfv);
    @(negedge clk);
    nc = NC_W'(ncv); tc = TC_W'(tcv); tf = TF_W'(tfv); reconf = 1;
    @(negedge clk);
    reconf = 0;
  endtask

  // wait until the receiver is inside data frame f
  task automatic wait_frame(int f);
    wait (t >= frame_start[f] + SYNC_DELAY + 2);
  endtask

  // ------------------------------------------------------------ counters
  int n_sync = 0, n_stall = 0, n_apply = 0, n_swap = 0, n_err = 0;
  int n_resync = 0;
  int n_rate = 0, n_rate_only = 0, n_preamble_end = 0, n_bits = 0;
  logic synced_q = 0, err_q = 0, pre_q = 0;
  logic [TC_W-1:0] tc_q = '0;

  always @(negedge clk) if (!rst) begin
    if (synced && !synced_q) n_sync++;
    if (cfg_error && !err_q) n_err++;
    if (!preamble && pre_q) n_preamble_end++;
    if (reconfigured && running) begin
      n_apply++;
      if (cfg.tc != tc_q) n_rate++;
      if (!code_swapped) n_rate_only++;
    end
    if (code_swapped && running) n_swap++;
    if (synced && !enable) n_stall++;
    synced_q = synced; err_q = cfg_error; pre_q = preamble; tc_q = cfg.tc;
  end

  // ------------------------------------------------------------ checker
  always @(negedge clk) if (!rst && rx_valid) begin
    checks += 2;
    if (n_bits >= NFRAMES) begin
      failures++; $display("extra bit at cycle %0d", cyc);
    end else begin
      automatic int pi = bit_end[n_bits] + SYNC_DELAY;
      if (rx_bit !== bits[n_bits]) begin
        failures++; $display("frame %0d: bit %0b sent %0b", n_bits, rx_bit, bits[n_bits]);
      end
      if (pi >= pres_cyc.size() || cyc != pres_cyc[pi] + 3) begin
        failures++;
        $display("frame %0d: bit at cycle %0d, expected %0d", n_bits, cyc,
                 pi < pres_cyc.size() ? pres_cyc[pi] + 3 : -1);
      end
    end
    n_bits++;
  end

  // ------------------------------------------------------------ main
  initial begin
    build();
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    // before reception: code A and the first setting, applied at once
    mac_load(0);
    checks++;
    if (!code_complete) begin failures++; $display("code A not complete"); end
    mac_reconf(8, 16, 128);
    @(negedge clk);
    checks++;
    if (cfg.tc != 8'd16 || cfg.nc != 8'd8 || code_complete) begin
      failures++; $display("idle setting not taken");
    end
    fork
      // sample feeder with random stalls
      begin
        while (t < q.size()) begin
          @(negedge clk);
          enable = ($urandom_range(7, 0) != 0);
          if (enable) begin
            sample = q[t];
            pres_cyc.push_back(cyc);
            t++;
          end
        end
        @(negedge clk);
        enable = 0;
      end
      // MAC layer
      begin
        wait_frame(2);
        mac_reconf(8, 16, 129);                 // refused
        wait_frame(5);
        checks++;
        if (!cfg_error || cfg.tc != 8'd16) begin failures++; $display("bad set not refused"); end
        mac_reconf(8, 20, 160);                 // rate only
        wait_frame(9);
        mac_load(1);
        mac_reconf(6, 24, 144);
        wait_frame(17);
        mac_load(2);
        mac_reconf(8, 8, 64);
        // resync once the first transmission's last bit is out
        wait (t >= gap_start + 2);
        @(negedge clk); resync = 1;
        @(negedge clk); resync = 0;
        n_resync++;
        checks++;
        if (synced || running) begin failures++; $display("still synced after resync"); end
      end
    join
    repeat (10) @(negedge clk);
    checks++;
    if (n_bits != NFRAMES) begin failures++; $display("%0d bits received of %0d", n_bits, NFRAMES); end
    checks++;
    if (cfg.tc != 8'd8 || cfg.nc != 8'd8 || cfg.tf != 16'd64) begin
      failures++; $display("final setting tf=%0d nc=%0d tc=%0d", cfg.tf, cfg.nc, cfg.tc);
    end
    $display("resyncs=%0d", n_resync);
    $display("mechanisms: sync=%0d preamble=%0d stall=%0d refused=%0d applied=%0d rate_change=%0d rate_only=%0d code_swap=%0d bits=%0d",
             n_sync, n_preamble_end, n_stall, n_err, n_apply, n_rate, n_rate_only, n_swap, n_bits);
    checks += 8;
    if (n_resync != 1)       begin failures++; $display("no resync"); end
    if (n_sync != 2)         begin failures++; $display("synchronisation count %0d", n_sync); end
    if (n_preamble_end != 2) begin failures++; $display("preamble end count %0d", n_preamble_end); end
    if (n_stall == 0)        begin failures++; $display("no stall"); end
    if (n_err != 1)          begin failures++; $display("refusal count %0d", n_err); end
    if (n_apply != 3)        begin failures++; $display("%0d settings applied while running", n_apply); end
    if (n_rate_only != 1)    begin failures++; $display("%0d rate-only changes", n_rate_only); end
    if (n_swap != 2)         begin failures++; $display("%0d code swaps while running", n_swap); end
    finish();
  end
endmodule
