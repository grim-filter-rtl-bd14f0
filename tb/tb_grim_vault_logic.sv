// tb_grim_vault_logic: checks one vault's logic slice (16 bins here).
//
// For each window: clear, a random active mask, 96 random rows arriving with
// random gaps, then a compare. Every bin's sum must equal the number of set
// bits counted here for that bin (zero for empty bins), a row loaded in cycle
// c must be in the sums in cycle c+2, and the bitmask after compare must be
// (sum >= threshold) for active bins and hold until the next compare.
module tb_grim_vault_logic;
  localparam int unsigned BINS = 16, ACC_W = 7;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear = 1'b0, row_load = 1'b0, compare = 1'b0, row_counted;
  logic [BINS-1:0] active_mask = '0, row_in = '0, bitmask;
  logic [ACC_W-1:0] threshold = '0;
  logic [BINS*ACC_W-1:0] sums;
  int checks = 0, failures = 0;
  int cnt [BINS];

  grim_vault_logic #(.BINS(BINS), .ACC_W(ACC_W)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int w = 0; w < 12; w++) begin
      automatic int rows = 0;
      automatic logic [BINS-1:0] prev_mask = bitmask, expm = '0;
      active_mask = 16'($urandom);
      threshold   = 7'($urandom % 97);
      clear = 1'b1;
      @(negedge clk);
      clear = 1'b0;
      foreach (cnt[b]) cnt[b] = 0;
      while (rows < 96) begin
        row_load = ($urandom % 3) != 0;
        for (int b = 0; b < int'(BINS); b++) row_in[b] = (b < 8) ? ($urandom % 10 < 9) : ($urandom % 10 < 2);
        @(negedge clk);                // row now in the register
        check(row_counted == row_load, "row_counted one cycle after load");
        if (row_load) begin
          rows++;
          for (int b = 0; b < int'(BINS); b++) if (row_in[b] && active_mask[b]) cnt[b]++;
        end
        row_load = 1'b0;
        @(negedge clk);                // row now in the sums
        for (int b = 0; b < int'(BINS); b++)
          check(int'(sums[b*ACC_W +: ACC_W]) == cnt[b], $sformatf("bin %0d sum %0d expected %0d", b, sums[b*ACC_W +: ACC_W], cnt[b]));
        check(bitmask == prev_mask, "bitmask holds until compare");
      end
      compare = 1'b1;
      @(negedge clk);
      compare = 1'b0;
      for (int b = 0; b < int'(BINS); b++) expm[b] = active_mask[b] && (cnt[b] >= int'(threshold));
      check(bitmask == expm, $sformatf("bitmask %h expected %h", bitmask, expm));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
