// tb_rate_range: the receiver over the whole range of its data-rate
// entries, with samples of 32-bit range.
//
// The emitter model sends a preamble and then segments of frames at
// (Nc, Tc) = (4,16), (1,8), (3,9), (2,255), (255,8), (255,255), (1,8):
// the highest rate the 8-bit entries allow (one bit per 8 samples), the
// lowest (one bit per 65025 samples), and odd sizes. Each segment has its
// own random TH code, loaded and switched in with the reconfiguration
// signal during the frame before the segment. The sample feed pauses
// (enable low) while the MAC side loads a code, since a frame can be as
// short as 8 samples. Pulse amplitude is 2**28, so samples span the range
// of a 32-bit word; the noise is +-2**20. Every bit and its arrival cycle
// are checked as in tb_ir_uwb_rx, and every switch must take effect.
module tb_rate_range;
  import uwb_pkg::*;
  import uwb_tx_pkg::*;

  localparam int NSEG = 7;
  localparam int SEG_NC [NSEG] = '{4, 1, 3,   2, 255, 255, 1};
  localparam int SEG_TC [NSEG] = '{16, 8, 9, 255,   8, 255, 8};
  localparam int SEG_NF [NSEG] = '{3, 6, 4,   3,   2,   2, 4};
  localparam longint AMP = 64'd1 << 28;

  logic clk = 0, rst = 1, enable = 0, resync = 0;
  logic signed [SAMPLE_W-1:0] sample = '0;
  logic signed [MF_W-1:0]     sync_thr = MF_W'(longint'(50) * AMP);
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

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [CODE_W-1:0] codes [NSEG][CODE_LEN];
  longint q[$];
  int     frame_start[$];
  int     frame_seg[$];
  int     bit_end[$];
  bit     bits[$];
  int     pres_cyc[$];
  int     t = 0;
  bit     hold = 0;

  function automatic void build();
    for (int s = 0; s < NSEG; s++)
      for (int i = 0; i < CODE_LEN; i++)
        codes[s][i] = CODE_W'($urandom_range(SEG_NC[s] - 1, 0));
    for (int i = 0; i < 21; i++) q.push_back(0);
    add_frame(q, SEG_TC[0], SEG_NC[0], 0, 0, 1, AMP);  // preamble
    for (int s = 0; s < NSEG; s++)
      for (int f = 0; f < SEG_NF[s]; f++) begin
        int c = int'(codes[s][f % CODE_LEN]);
        bit b = 1'($urandom_range(1, 0));
        bits.push_back(b);
        frame_seg.push_back(s);
        frame_start.push_back(q.size());
        bit_end.push_back(q.size() + c * SEG_TC[s] + SEG_TC[s] - 1);
        add_frame(q, SEG_TC[s], SEG_NC[s], c, b, 0, AMP);
      end
    // just enough to flush the last chip out of the delay line; more would
    // start further (empty) frames, each of which yields a bit
    for (int i = 0; i < SYNC_DELAY; i++) q.push_back(0);
    foreach (q[i]) q[i] += noise(1 << 20);
  endfunction

  task automatic mac_switch(int s);
    @(negedge clk); code_restart = 1;
    @(negedge clk); code_restart = 0;
    for (int i = 0; i < CODE_LEN; i++) begin
      @(negedge clk); code_load = 1; code_in = codes[s][i];
    end
    @(negedge clk); code_load = 0;
    nc = NC_W'(SEG_NC[s]); tc = TC_W'(SEG_TC[s]); tf = TF_W'(SEG_NC[s] * SEG_TC[s]);
    reconf = 1;
    @(negedge clk); reconf = 0;
  endtask

  int n_bits = 0, n_apply = 0, n_swap = 0;
  always @(negedge clk) if (!rst) begin
    if (reconfigured && running) n_apply++;
    if (code_swapped && running) n_swap++;
  end

  always @(negedge clk) if (!rst && rx_valid) begin
    checks += 2;
    if (n_bits >= bits.size()) begin
      failures++; $display("extra bit at cycle %0d", cyc);
    end else begin
      automatic int pi = bit_end[n_bits] + SYNC_DELAY;
      if (rx_bit !== bits[n_bits]) begin
        failures++; $display("frame %0d (Nc=%0d Tc=%0d): bit %0b sent %0b", n_bits,
                             SEG_NC[frame_seg[n_bits]], SEG_TC[frame_seg[n_bits]], rx_bit, bits[n_bits]);
      end
      if (pi >= pres_cyc.size() || cyc != pres_cyc[pi] + 3) begin
        failures++; $display("frame %0d: bit at cycle %0d, expected %0d", n_bits, cyc,
                             pi < pres_cyc.size() ? pres_cyc[pi] + 3 : -1);
      end
    end
    n_bits++;
  end

  initial begin
    int f0;
    build();
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    mac_switch(0);                   // applied at once: not yet synchronised
    @(negedge clk);
    fork
      begin
        while (t < q.size()) begin
          @(negedge clk);
          enable = !hold;
          if (enable) begin
            sample = q[t];
            pres_cyc.push_back(cyc);
            t++;
          end
        end
        @(negedge clk);
        enable = 0;
      end
      begin
        f0 = 0;
        for (int s = 1; s < NSEG; s++) begin
          f0 += SEG_NF[s-1];
          // inside the last frame of the previous segment
          wait (t >= frame_start[f0 - 1] + SYNC_DELAY + 2);
          hold = 1;
          mac_switch(s);
          hold = 0;
        end
      end
    join
    repeat (10) @(negedge clk);
    checks += 3;
    if (n_bits != bits.size()) begin failures++; $display("%0d bits of %0d", n_bits, bits.size()); end
    if (n_apply != NSEG - 1)   begin failures++; $display("%0d settings applied", n_apply); end
    if (n_swap != NSEG - 1)    begin failures++; $display("%0d code swaps", n_swap); end
    $display("bits=%0d applied=%0d swaps=%0d samples=%0d", n_bits, n_apply, n_swap, q.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
