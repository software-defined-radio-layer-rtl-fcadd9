// tb_reconfig_regs: PHY parameter registers and the reconfiguration
// signal. Checks the reset setting, immediate apply while idle, refusal
// of inconsistent sets with cfg_error, and that while running a set
// waits for frame_end and is applied exactly there, the last one winning.
module tb_reconfig_regs;
  import uwb_pkg::*;

  logic clk = 0, rst = 1, reconf = 0, running = 0, frame_end = 0;
  logic [TF_W-1:0] tf = '0;
  logic [NC_W-1:0] nc = '0;
  logic [TC_W-1:0] tc = '0;
  rx_cfg_t cfg;
  logic apply, pending, cfg_error;
  int checks = 0, failures = 0;

  reconfig_regs dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  rx_cfg_t exp_cfg;

  task automatic check(string what, bit exp_pending, bit exp_err);
    checks += 3;
    if (cfg !== exp_cfg) begin
      failures++; $display("%s: cfg tf=%0d nc=%0d tc=%0d expected tf=%0d nc=%0d tc=%0d",
                           what, cfg.tf, cfg.nc, cfg.tc, exp_cfg.tf, exp_cfg.nc, exp_cfg.tc);
    end
    if (pending !== exp_pending) begin failures++; $display("%s: pending=%0b", what, pending); end
    if (cfg_error !== exp_err) begin failures++; $display("%s: cfg_error=%0b", what, cfg_error); end
  endtask

  task automatic send(int ncv, int tcv, int tfv);
    @(negedge clk);
    nc = NC_W'(ncv); tc = TC_W'(tcv); tf = TF_W'(tfv); reconf = 1;
    @(negedge clk);
    reconf = 0;
  endtask

  function automatic bit is_good(int ncv, int tcv, int tfv);
    return ncv * tcv == tfv && tcv >= TC_MIN && ncv != 0;
  endfunction

  initial begin
    int ncv, tcv, tfv;
    bit err;
    repeat (2) @(posedge clk);
    rst <= 0;
    exp_cfg = CFG_RESET;
    @(negedge clk);
    check("reset", 0, 0);
    err = 0;
    // idle: applied at once
    for (int n = 0; n < 50; n++) begin
      ncv = $urandom_range(255, 0);
      tcv = $urandom_range(255, 0);
      tfv = (n % 4 == 0) ? ncv * tcv + 1 : ncv * tcv;
      send(ncv, tcv, tfv);
      if (is_good(ncv, tcv, tfv)) begin
        err = 0;
        checks++;
        if (apply !== 1'b1) begin failures++; $display("idle set not applied at once"); end
        @(negedge clk);
        exp_cfg = '{tf: TF_W'(tfv), nc: NC_W'(ncv), tc: TC_W'(tcv)};
      end else begin
        err = 1;
      end
      check("idle", 0, err);
    end
    // running: held until frame_end
    running = 1;
    for (int n = 0; n < 50; n++) begin
      automatic int last_nc = -1, last_tc = 0, last_tf = 0;
      for (int k = 0; k < 1 + n % 3; k++) begin
        ncv = $urandom_range(64, 1);
        tcv = $urandom_range(64, 8);
        tfv = (n % 5 == 4 && k == 0) ? ncv * tcv - 1 : ncv * tcv;
        send(ncv, tcv, tfv);
        if (is_good(ncv, tcv, tfv)) begin
          last_nc = ncv; last_tc = tcv; last_tf = tfv; err = 0;
        end else err = 1;
        check("running, before frame_end", last_nc >= 0, err);
      end
      repeat ($urandom_range(5, 0)) begin
        @(negedge clk);
        check("waiting", last_nc >= 0, err);
      end
      @(negedge clk);
      frame_end = 1;
      #1;
      checks++;
      if (apply !== (last_nc >= 0)) begin failures++; $display("apply=%0b at frame_end", apply); end
      @(negedge clk);
      frame_end = 0;
      if (last_nc >= 0) exp_cfg = '{tf: TF_W'(last_tf), nc: NC_W'(last_nc), tc: TC_W'(last_tc)};
      check("after frame_end", 0, err);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
