// tb_seed_location_checker: checks that only seeds whose bin bit is set pass.
//
// A 64-bin window is used. Each round hands over a random bitmask and a seed
// count, then feeds that many seeds (random locations and bin offsets) with
// random gaps while the receiving side drops out_ready at random. The kept
// locations must come out in order and be exactly those whose bin bit is
// set; keep and discard events must add up to the seed count; a new bitmask
// is refused while seeds of the previous window are left. One round with the
// receiver always ready checks the rate of one seed per cycle.
module tb_seed_location_checker;
  localparam int unsigned WINDOW = 64, LOC_W = 32, CNT_W = 9, OFF_W = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic bm_valid = 1'b0, bm_ready, seed_valid = 1'b0, seed_ready, out_valid, out_ready = 1'b1;
  logic ev_keep, ev_discard;
  logic [WINDOW-1:0] bm_data = '0;
  logic [CNT_W-1:0] bm_nseeds = '0;
  logic [LOC_W-1:0] seed_loc = '0, out_loc;
  logic [OFF_W-1:0] seed_off = '0;
  logic random_ready = 1'b0;
  int checks = 0, failures = 0, nkeep = 0, ndisc = 0;
  logic [LOC_W-1:0] expq [$];

  seed_location_checker #(.WINDOW(WINDOW), .LOC_W(LOC_W), .CNT_W(CNT_W)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    nkeep += int'(ev_keep);
    ndisc += int'(ev_discard);
    if (out_valid && out_ready) begin
      if (expq.size() == 0) check(0, "unexpected kept seed");
      else check(out_loc == expq.pop_front(), "kept seed location");
    end
    out_ready <= random_ready ? 1'($urandom % 2) : 1'b1;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 30; r++) begin
      automatic int n = 1 + int'($urandom % 40), t0;
      automatic logic [WINDOW-1:0] m = {$urandom, $urandom};
      random_ready = (r != 0);
      @(negedge clk);
      check(bm_ready, "checker free");
      bm_data = m; bm_nseeds = CNT_W'(n); bm_valid = 1'b1;
      @(negedge clk);
      bm_valid = 1'b0;
      nkeep = 0; ndisc = 0;
      t0 = 0;
      for (int i = 0; i < n; i++) begin
        seed_loc = $urandom; seed_off = OFF_W'($urandom);
        if (m[seed_off]) expq.push_back(seed_loc);
        seed_valid = 1'b1;
        #1;
        check(!bm_ready, "no new bitmask while seeds are left");
        while (!seed_ready) begin @(negedge clk); t0++; end
        @(negedge clk);
        t0++;
        if (r != 0) begin seed_valid = 1'b0; repeat ($urandom % 2) @(negedge clk); end
      end
      seed_valid = 1'b0;
      if (r == 0) check(t0 == n, $sformatf("%0d seeds took %0d cycles", n, t0));
      while (expq.size() != 0) @(negedge clk);
      repeat (2) @(negedge clk);
      check(nkeep + ndisc == n, "every seed decided once");
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
