// tb_template_gen: checks both PPM templates for every sample index of
// several chip durations against a reference built from the pulse table.
module tb_template_gen;
  import uwb_pkg::*;

  logic [TC_W-1:0] idx, tc;
  coef_t           c0, c1;
  int checks = 0, failures = 0;

  template_gen #(.PPM_ONE(1'b0)) dut0 (.idx, .tc, .coef(c0));
  template_gen #(.PPM_ONE(1'b1)) dut1 (.idx, .tc, .coef(c1));

  function automatic int ref_coef(int i, int off);
    if (i - off >= 0 && i - off < PULSE_LEN) return int'(PULSE[i - off]);
    return 0;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tcs[5] = '{8, 9, 16, 33, 255};
    foreach (tcs[k]) begin
      tc = TC_W'(tcs[k]);
      for (int i = 0; i < 256; i++) begin
        idx = TC_W'(i);
        #1;
        checks += 2;
        if (int'(c0) != ref_coef(i, 0)) begin
          failures++;
          $display("tc=%0d idx=%0d bit0 template %0d expected %0d", tcs[k], i, c0, ref_coef(i, 0));
        end
        if (int'(c1) != ref_coef(i, tcs[k] / 2)) begin
          failures++;
          $display("tc=%0d idx=%0d bit1 template %0d expected %0d", tcs[k], i, c1, ref_coef(i, tcs[k] / 2));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
