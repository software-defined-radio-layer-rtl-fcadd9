// tb_decision: random correlation pairs, including ties and sign
// changes; checks the bit and the one-cycle latency of bit_valid.
module tb_decision;
  import uwb_pkg::*;

  logic clk = 0, rst = 1, done_tc = 0;
  logic signed [ACC_W-1:0] corr0 = '0, corr1 = '0;
  logic bit_out, bit_valid;
  int checks = 0, failures = 0;

  decision dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit exp;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      corr0   = {$urandom, $urandom, $urandom} >>> ($urandom_range(40, 0));
      corr1   = (n % 7 == 0) ? corr0 : {$urandom, $urandom, $urandom} >>> ($urandom_range(40, 0));
      if (n % 5 == 0) corr1 = -corr1;
      done_tc = ($urandom_range(3, 0) != 0);
      exp     = (corr1 > corr0);
      @(negedge clk);
      checks++;
      if (bit_valid !== done_tc) begin
        failures++;
        $display("bit_valid %0b expected %0b", bit_valid, done_tc);
      end
      if (done_tc) begin
        checks++;
        if (bit_out !== exp) begin
          failures++;
          $display("bit %0b expected %0b for corr1=%0d corr0=%0d", bit_out, exp, corr1, corr0);
        end
      end
      done_tc = 0;
      @(negedge clk);
      checks++;
      if (bit_valid !== 1'b0) begin
        failures++;
        $display("bit_valid held longer than one cycle");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
