// tb_th_discrimination: time-hopping discrimination.
// Plays the correlation/decision side: chip_end every few cycles, a
// random per-chip decision two cycles after each chip_end, and a random
// code value per frame. Checks that exactly the coded chip's decision of
// each data frame comes out, none from the preamble frame, that
// frame_end/code_step mark the last chip of each frame, and that a
// change of nc takes effect from the next frame.
module tb_th_discrimination;
  import uwb_pkg::*;

  logic clk = 0, rst = 1, start = 0, chip_end = 0;
  logic [NC_W-1:0]   nc;
  logic [CODE_W-1:0] code;
  logic bit_in = 0, bit_valid = 0;
  logic [NC_W-1:0] chip_cnt;
  logic preamble, frame_end, code_step, rx_bit, rx_valid;
  int checks = 0, failures = 0;

  th_discrimination dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit exp_q[$];
  int got = 0;

  // collect and check the output bits
  always @(negedge clk) if (!rst && rx_valid) begin
    checks++;
    got++;
    if (exp_q.size() == 0) begin
      failures++; $display("unexpected output bit");
    end else begin
      automatic bit e = exp_q.pop_front();
      if (rx_bit !== e) begin failures++; $display("bit %0b expected %0b", rx_bit, e); end
    end
  end

  // per-chip decisions, two clock edges after chip_end, as from
  // correlation (done_tc) and then decision (bit_valid)
  bit dec_pipe;
  bit val_pipe;
  bit cur_dec;
  always @(posedge clk) begin
    bit_valid <= val_pipe;
    bit_in    <= dec_pipe;
    val_pipe  <= chip_end;
    dec_pipe  <= cur_dec;
  end

  task automatic frame(int ncv, bit pre, int spacing);
    int cv = $urandom_range(ncv - 1, 0);
    for (int c = 0; c < ncv; c++) begin
      repeat (spacing - 1) @(negedge clk);
      @(negedge clk);
      if (c == 0) code = CODE_W'(cv);
      cur_dec  = 1'($urandom_range(1, 0));
      chip_end = 1;
      #1;
      checks += 3;
      if (chip_cnt != NC_W'(c)) begin failures++; $display("chip_cnt %0d expected %0d", chip_cnt, c); end
      if (frame_end !== (c == ncv - 1)) begin failures++; $display("frame_end wrong at chip %0d", c); end
      if (code_step !== (c == ncv - 1 && !pre)) begin failures++; $display("code_step wrong at chip %0d", c); end
      if (!pre && c == cv) exp_q.push_back(cur_dec);
      @(negedge clk);
      chip_end = 0;
    end
  endtask

  initial begin
    int sent;
    int ncv;
    sent = 0;
    nc   = NC_W'(8);
    code = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int run = 0; run < 6; run++) begin
      ncv = (run % 3 == 0) ? 8 : int'($urandom_range(20, 1));
      @(negedge clk);
      nc    = NC_W'(ncv);
      start = 1;
      @(negedge clk);
      start = 0;
      checks++;
      if (!preamble) begin failures++; $display("no preamble after start"); end
      frame(ncv, 1, 3);
      for (int f = 0; f < 12; f++) begin
        if (f == 6) begin
          ncv = $urandom_range(30, 1);
          nc  = NC_W'(ncv);   // new Nc from the next frame on
        end
        frame(ncv, 0, (f % 2 != 0) ? 2 : 5);
        sent++;
      end
      repeat (8) @(negedge clk);
    end
    checks++;
    if (got != sent || exp_q.size() != 0) begin
      failures++; $display("%0d bits out, %0d expected", got, sent);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
