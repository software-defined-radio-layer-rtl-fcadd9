// tb_correlation: double correlator and chip timer.
// After a start mark, random samples are fed with random enable gaps and
// a chip duration that changes between runs. For every chip the two sums
// are worked out from the pulse table and compared with corr0/corr1 at
// done_tc; done_tc must come exactly one cycle after the chip's last
// sample, i.e. every tc enabled samples, and chip_end only on that sample.
module tb_correlation;
  import uwb_pkg::*;

  logic clk = 0, rst = 1, en = 0, start = 0;
  logic signed [SAMPLE_W-1:0] sample = '0;
  logic [TC_W-1:0] tc;
  logic [TC_W-1:0] idx;
  logic running, chip_end, done_tc;
  logic signed [ACC_W-1:0] corr0, corr1;
  int checks = 0, failures = 0;

  correlation dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint tpl(int i, int off);
    if (i - off >= 0 && i - off < PULSE_LEN) return longint'(PULSE[i - off]);
    return 0;
  endfunction

  task automatic run(int tcv, int chips, bit gaps);
    longint s0, s1;
    tc = TC_W'(tcv);
    for (int c = 0; c < chips; c++) begin
      s0 = 0;
      s1 = 0;
      for (int i = 0; i < tcv; i++) begin
        longint x;
        @(negedge clk);
        if (gaps) while ($urandom_range(4, 0) == 0) begin
          en = 0; start = 0;
          @(negedge clk);
          checks++;
          if (done_tc !== 1'b0) begin failures++; $display("done_tc during a gap"); end
        end
        en     = 1;
        start  = (c == 0 && i == 0);
        x      = longint'({$urandom, $urandom}) >>> $urandom_range(50, 20);
        sample = x;
        s0    += x * tpl(i, 0);
        s1    += x * tpl(i, tcv / 2);
        #1;
        checks += 2;
        if (idx != TC_W'(i)) begin failures++; $display("idx %0d expected %0d", idx, i); end
        if (chip_end !== (i == tcv - 1)) begin
          failures++; $display("chip_end=%0b at sample %0d of %0d", chip_end, i, tcv);
        end
        if (i != 0) begin
          checks++;
          if (done_tc !== 1'b0) begin failures++; $display("done_tc inside a chip"); end
        end
      end
      @(negedge clk);
      en = 0; start = 0;
      checks += 3;
      if (done_tc !== 1'b1) begin failures++; $display("no done_tc after chip %0d", c); end
      if (corr0 != ACC_W'(s0)) begin failures++; $display("corr0 %0d expected %0d", corr0, s0); end
      if (corr1 != ACC_W'(s1)) begin failures++; $display("corr1 %0d expected %0d", corr1, s1); end
      // the next chip begins at the next enabled sample, with no start mark
    end
  endtask

  initial begin
    tc = TC_W'(16);
    repeat (2) @(posedge clk);
    rst <= 0;
    repeat (3) @(posedge clk);
    checks++;
    if (running || done_tc) begin failures++; $display("active before start"); end
    run(16, 20, 0);
    run(16, 10, 1);
    run(8, 20, 1);
    run(37, 10, 1);
    run(255, 4, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
