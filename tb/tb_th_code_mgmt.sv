// tb_th_code_mgmt: TH-code memory and bank switch.
// Checks the all-zero code after reset, loading a new code while the old
// one is read and stepped, complete, that apply swaps only a complete
// code and restarts it at entry 0, that start restarts the code, that
// extra loads are ignored and that load_restart starts a load over.
module tb_th_code_mgmt;
  import uwb_pkg::*;

  localparam int IW = $clog2(CODE_LEN);

  logic clk = 0, rst = 1;
  logic load_restart = 0, load = 0, apply = 0, step = 0, start = 0;
  logic [CODE_W-1:0] load_code = '0;
  logic [CODE_W-1:0] code;
  logic [IW-1:0] code_idx;
  logic complete, swapped;
  int checks = 0, failures = 0;

  th_code_mgmt dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [CODE_W-1:0] active [CODE_LEN];
  int idx_model = 0;

  task automatic check_code(string what);
    checks += 2;
    if (code !== active[idx_model]) begin
      failures++; $display("%s: code %0d expected %0d (entry %0d)", what, code, active[idx_model], idx_model);
    end
    if (code_idx !== IW'(idx_model)) begin
      failures++; $display("%s: code_idx %0d expected %0d", what, code_idx, idx_model);
    end
  endtask

  task automatic do_step();
    @(negedge clk); step = 1;
    @(negedge clk); step = 0;
    idx_model = (idx_model + 1) % CODE_LEN;
    check_code("step");
  endtask

  task automatic load_code_seq(ref logic [CODE_W-1:0] v [CODE_LEN], input int n);
    @(negedge clk); load_restart = 1;
    @(negedge clk); load_restart = 0;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      load = 1; load_code = v[i];
      @(negedge clk);
      load = 0;
      // the code in use is not disturbed by loading
      check_code("while loading");
      if (i % 3 == 0) do_step();
    end
  endtask

  task automatic do_apply(bit expect_swap, ref logic [CODE_W-1:0] v [CODE_LEN]);
    @(negedge clk); apply = 1; step = 1;  // the frame boundary also steps
    @(negedge clk); apply = 0; step = 0;
    checks++;
    if (swapped !== expect_swap) begin failures++; $display("swapped=%0b expected %0b", swapped, expect_swap); end
    if (expect_swap) begin
      active = v;
      idx_model = 0;
    end else begin
      idx_model = (idx_model + 1) % CODE_LEN;
    end
    check_code("after apply");
  endtask

  initial begin
    logic [CODE_W-1:0] v [CODE_LEN];
    foreach (active[i]) active[i] = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    @(negedge clk);
    check_code("reset");
    checks++;
    if (complete) begin failures++; $display("complete after reset"); end
    for (int round = 0; round < 8; round++) begin
      foreach (v[i]) v[i] = CODE_W'($urandom);
      // half a code, then restart and a full one
      load_code_seq(v, CODE_LEN / 2);
      checks++;
      if (complete) begin failures++; $display("complete after a partial load"); end
      if (round == 0) do_apply(0, v);      // incomplete: no swap
      load_code_seq(v, CODE_LEN);
      checks++;
      if (!complete) begin failures++; $display("not complete after a full load"); end
      // one more load is ignored
      @(negedge clk); load = 1; load_code = ~v[0];
      @(negedge clk); load = 0;
      repeat ($urandom_range(CODE_LEN * 2, 1)) do_step();
      do_apply(1, v);
      checks++;
      if (complete) begin failures++; $display("complete right after the swap"); end
      for (int k = 0; k < CODE_LEN + 3; k++) do_step();
      // start restarts the code
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      idx_model = 0;
      check_code("after start");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
