// tb_threshold_calc: checks the accumulation sum threshold equation.
//
// For every error tolerance from 0 to 1.000 in steps of 0.001, the threshold
// is compared with read_length-(n-1) - n*ceil(read_length*e) computed here in
// floating point (clamped at zero), and the error count with
// ceil(read_length*e). Spot checks use the paper's settings: 100-base reads,
// token size 5, e = 0.00 .. 0.05 gives thresholds 96, 91, 86, 81, 76, 71.
module tb_threshold_calc;
  logic [9:0] e_milli;
  logic [6:0] threshold, max_errors;
  int checks = 0, failures = 0;

  threshold_calc #(.READ_LEN(100), .TOKEN_LEN(5), .ACC_W(7)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int paper [6] = '{96, 91, 86, 81, 76, 71};
    for (int e = 0; e <= 1000; e++) begin
      automatic int errs = int'($ceil(100.0 * real'(e) / 1000.0 - 1.0e-9));
      automatic int thr  = 96 - 5*errs;
      if (thr < 0) thr = 0;
      e_milli = 10'(e);
      #1;
      check(int'(threshold) == thr, $sformatf("e=%0d/1000: threshold %0d, expected %0d", e, threshold, thr));
      check(int'(max_errors) == errs, $sformatf("e=%0d/1000: errors %0d, expected %0d", e, max_errors, errs));
    end
    for (int i = 0; i < 6; i++) begin
      e_milli = 10'(10*i);
      #1;
      check(int'(threshold) == paper[i], $sformatf("e=0.0%0d threshold %0d", i, threshold));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
