// tb_grim_logic_module: checks one per-bin logic module.
//
// Each trial clears the accumulator, feeds 96 tokens' existence bits (random,
// with random gaps in inc_en) and compares the sum, one cycle after each
// increment, with a count kept here, and the filter bit with sum >= threshold
// for a sweep of thresholds. A module whose bin is empty (active low) must
// keep a zero sum and a zero filter bit. The largest sum of a 100-base read
// (96) must fit the 7-bit accumulator.
module tb_grim_logic_module;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear = 1'b0, active = 1'b1, inc_en = 1'b0, exist_bit = 1'b0, filter_bit;
  logic [6:0] threshold = '0, sum;
  int checks = 0, failures = 0;

  grim_logic_module #(.ACC_W(7)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 40; t++) begin
      automatic int cnt = 0, ntok = 0, density = (t == 0) ? 100 : int'($urandom % 101);
      active = (t % 5) != 3;
      clear = 1'b1;
      @(negedge clk);
      clear = 1'b0;
      check(sum == 0, "sum zero after clear");
      while (ntok < 96) begin
        inc_en    = ($urandom % 4) != 0;
        exist_bit = int'($urandom % 100) < density;
        @(negedge clk);
        if (inc_en) begin
          ntok++;
          if (exist_bit && active) cnt++;
        end
        check(int'(sum) == cnt, $sformatf("sum %0d, expected %0d", sum, cnt));
      end
      inc_en = 1'b0;
      for (int th = 0; th < 100; th += 7) begin
        threshold = 7'(th);
        #1;
        check(filter_bit == (active && cnt >= th), $sformatf("filter bit sum=%0d thr=%0d active=%0d", cnt, th, active));
      end
      if (t == 0) check(sum == 7'd96, "all 96 tokens present");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
