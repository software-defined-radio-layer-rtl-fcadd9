// tb_sync_filter: matched-filter synchronisation.
// Drives noise, then a pulse starting at a random sample s, with random
// enable gaps. Checks the filter output sample by sample against a
// reference, that start rises exactly at enabled sample s + SYNC_DELAY
// and nowhere else, that synced follows, and that resync hunts again.
module tb_sync_filter;
  import uwb_pkg::*;
  import uwb_tx_pkg::*;

  logic clk = 0, rst = 1, en = 0, resync = 0;
  logic signed [SAMPLE_W-1:0] sample = '0;
  logic signed [MF_W-1:0]     thr;
  logic signed [MF_W-1:0]     mf_out;
  logic start, synced;
  int checks = 0, failures = 0;
  longint hist[$];  // every sample taken since reset

  sync_filter dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_trial(int s, longint amp, int nz, int gaps);
    longint q[$];
    int     starts = 0;
    // stream: s noise samples, then the pulse, then silence
    for (int i = 0; i < s; i++) q.push_back(0);
    for (int i = 0; i < PULSE_LEN; i++) q.push_back(amp * longint'(PULSE[i]));
    for (int i = 0; i < 3 * SYNC_DELAY; i++) q.push_back(0);
    foreach (q[i]) q[i] += noise(nz);
    for (int t = 0; t < q.size(); t++) begin
      longint refy = 0;
      @(negedge clk);
      while (gaps != 0 && $urandom_range(3, 0) == 0) begin
        en = 0;
        @(negedge clk);
        checks++;
        if (start) begin failures++; $display("start while en low"); end
      end
      en = 1;
      sample = q[t];
      hist.push_back(q[t]);
      #1;
      for (int i = 0; i < PULSE_LEN; i++)
        if (hist.size() - PULSE_LEN + i >= 0)
          refy += longint'(PULSE[i]) * hist[hist.size() - PULSE_LEN + i];
      checks++;
      if (mf_out != MF_W'(refy)) begin
        failures++;
        $display("t=%0d mf_out %0d expected %0d", t, mf_out, refy);
      end
      checks++;
      if (start !== (t == s + SYNC_DELAY)) begin
        failures++;
        $display("t=%0d start=%0b (pulse at %0d, expected at %0d)", t, start, s, s + SYNC_DELAY);
      end
      if (start) starts++;
      if (t == s + SYNC_DELAY + 1) begin
        checks++;
        if (!synced) begin failures++; $display("synced not set"); end
      end
    end
    checks++;
    if (starts != 1) begin failures++; $display("%0d start marks", starts); end
    @(negedge clk);
    en = 0;
  endtask

  initial begin
    thr = MF_W'(4000);
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 30; n++) begin
      @(negedge clk);
      resync = 1;
      @(negedge clk);
      resync = 0;
      checks++;
      if (synced) begin failures++; $display("synced after resync"); end
      run_trial($urandom_range(40, 0), longint'($urandom_range(2000, 100)), (n % 3 == 0) ? 0 : 40, n % 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
