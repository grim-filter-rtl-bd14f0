// tb_grim_filter_top: end-to-end test of the whole GRIM-Filter at its default
// (full) size: 8 vaults x 512 bins = 4096-bin window, 100-base reads, 5-base
// tokens, 450 x 2^16 bins of address space.
//
// The testbench builds a random reference genome covering two bin windows
// (8192 bins; bin b spans bases 100b .. 100b+199, so neighbouring bins overlap
// by one read length), sets the bitvectors of every bin in the DRAM model,
// and then plays read mapper: each command sends a read (a stretch of the
// genome with a few substitutions, or a random read), a bin window, an error
// tolerance and the seed locations in that window (the read's true location
// plus decoys). A reference model recomputes each active bin's accumulation
// sum straight from the bitvectors and the threshold from the equation, and
// the test checks every bitmask written to the bitmask buffer, every location
// passed on for alignment, that a true location is never dropped, and the
// cycle count of an unstalled window (one row per cycle: tokens + memory
// latency + 2). Phase 1 runs without back-pressure; phase 2 adds random DRAM
// stalls and a slow read mapper. Every mechanism (skipped window, DRAM stall,
// checker-busy stall, keep, discard) must occur at least once.
module tb_grim_filter_top;
  import grim_pkg::*;

  localparam int unsigned W       = WINDOW_BINS;
  localparam int unsigned NTOK    = READ_LEN - TOKEN_LEN + 1;
  localparam int unsigned ROWS    = 1 << (2*TOKEN_LEN);
  localparam int unsigned WIN_W   = $clog2((NUM_BINS + W - 1) / W);
  localparam int unsigned OFF_W   = $clog2(W);
  localparam int unsigned CNT_W   = $clog2(SEED_DEPTH + 1);
  localparam int unsigned NWIN    = 2;
  localparam int unsigned STRIDE  = 100;
  localparam int unsigned BINSZ   = 200;
  localparam int unsigned GLEN    = NWIN*W*STRIDE + BINSZ;
  localparam int unsigned LAT     = 3;
  localparam int unsigned NCMD1   = 6;
  localparam int unsigned NCMD2   = 18;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                  cmd_valid = 1'b0, cmd_ready;
  logic [2*READ_LEN-1:0] cmd_read_seq = '0;
  logic [WIN_W-1:0]      cmd_window = '0;
  logic [E_W-1:0]        cmd_e_milli = '0;
  logic [CNT_W-1:0]      cmd_nseeds = '0;
  logic                  seed_valid = 1'b0, seed_ready;
  logic [LOC_W-1:0]      seed_loc = '0;
  logic [OFF_W-1:0]      seed_bin_off = '0;
  logic                  mem_req_valid, mem_req_ready;
  logic [WIN_W-1:0]      mem_req_window;
  logic [2*TOKEN_LEN-1:0] mem_req_row;
  logic                  mem_rsp_valid;
  logic [W-1:0]          mem_rsp_data;
  logic                  bmw_valid;
  logic [WIN_W-1:0]      bmw_window;
  logic [W-1:0]          bmw_data;
  logic                  out_valid, out_ready = 1'b1;
  logic [LOC_W-1:0]      out_loc;
  logic                  ev_skip, ev_out_stall, ev_mem_stall, ev_keep, ev_discard;
  logic                  stall_en = 1'b0;
  logic                  slow_mapper = 1'b0;

  grim_filter_top dut (.*);

  dram_bitvector_model #(.WINDOW(W), .WIN_W(WIN_W), .ROW_W(2*TOKEN_LEN), .NWIN(NWIN),
                         .LATENCY(LAT), .STALL_PCT(30)) u_mem (
    .clk        (clk),
    .stall_en   (stall_en),
    .req_valid  (mem_req_valid),
    .req_ready  (mem_req_ready),
    .req_window (mem_req_window),
    .req_row    (mem_req_row),
    .rsp_valid  (mem_rsp_valid),
    .rsp_data   (mem_rsp_data)
  );

  int checks = 0, failures = 0;
  int n_skip = 0, n_out_stall = 0, n_mem_stall = 0, n_keep = 0, n_discard = 0;
  int n_true_kept = 0;
  int cycle = 0;
  logic [1:0] genome [GLEN];

  // expected results, in order
  logic [LOC_W-1:0] exp_loc [$];
  logic [W-1:0]     exp_mask [$];
  int               exp_win [$];
  logic [LOC_W-1:0] true_locs [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  function automatic int tok_at(input logic [2*READ_LEN-1:0] rd, input int k);
    int v = 0;
    for (int b = 0; b < int'(TOKEN_LEN); b++) v = v*4 + int'(rd[2*(k+b) +: 2]);
    return v;
  endfunction

  // Reference: accumulation sum of bin (window w, offset o) for read rd.
  function automatic int ref_sum(input logic [2*READ_LEN-1:0] rd, input int w, input int o);
    int s = 0;
    for (int k = 0; k < int'(NTOK); k++) s += int'(u_mem.rows[w*ROWS + tok_at(rd, k)][o]);
    return s;
  endfunction

  function automatic int ref_thr(input int e_milli);
    int errs = int'($ceil(real'(READ_LEN) * real'(e_milli) / 1000.0));
    int t = int'(NTOK) - int'(TOKEN_LEN) * errs;
    return (t < 0) ? 0 : t;
  endfunction

  // statistics and output monitors
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      n_skip      += int'(ev_skip);
      n_out_stall += int'(ev_out_stall);
      n_mem_stall += int'(ev_mem_stall);
      n_keep      += int'(ev_keep);
      n_discard   += int'(ev_discard);
      if (slow_mapper) out_ready <= ($urandom % 4) == 0;
      else             out_ready <= 1'b1;
      if (out_valid && out_ready) begin
        if (exp_loc.size() == 0) check(0, "unexpected output location");
        else begin
          automatic logic [LOC_W-1:0] e = exp_loc.pop_front();
          check(out_loc == e, $sformatf("kept location %0d, expected %0d", out_loc, e));
          foreach (true_locs[i]) if (true_locs[i] == out_loc) n_true_kept++;
        end
      end
      if (bmw_valid) begin
        if (exp_mask.size() == 0) check(0, "unexpected bitmask write");
        else begin
          automatic logic [W-1:0] m = exp_mask.pop_front();
          automatic int ew = exp_win.pop_front();
          check(bmw_data == m, $sformatf("bitmask of window %0d differs in %0d bits", ew, $countones(bmw_data ^ m)));
          check(int'(bmw_window) == ew, "bitmask window index");
        end
      end
    end
  end

  // One command: read, window, error tolerance, seeds.
  int first_req_cycle, bmw_cycle;
  task automatic run_cmd(input int w, input int e_milli, input int kind, input bit timed);
    logic [2*READ_LEN-1:0] rd;
    logic [LOC_W-1:0] locs [$];
    int offs [$];
    logic [W-1:0] mask = '0;
    bit active [int];
    int nerr, p, thr, nseed;
    thr = ref_thr(e_milli);
    nerr = int'($ceil(real'(READ_LEN) * real'(e_milli) / 1000.0));
    if (kind == 0) begin
      nseed = 0;                                    // empty window
    end else begin
      // true location inside the window, read copied from it with errors
      p = (w*int'(W) + int'($urandom % W)) * int'(STRIDE) + int'($urandom % STRIDE);
      for (int i = 0; i < int'(READ_LEN); i++) rd[2*i +: 2] = genome[p+i];
      if (kind == 2) for (int i = 0; i < int'(READ_LEN); i++) rd[2*i +: 2] = 2'($urandom);
      else for (int j = 0; j < nerr; j++) begin
        int q = int'($urandom % READ_LEN);
        rd[2*q +: 2] = rd[2*q +: 2] + 2'(1 + $urandom % 3);
      end
      locs.push_back(LOC_W'(p));
      offs.push_back(p / int'(STRIDE) - w*int'(W));
      if (kind == 1) true_locs.push_back(LOC_W'(p));
      nseed = 20 + int'($urandom % 40);
      for (int j = 1; j < nseed; j++) begin
        int o = (j % 7 == 0) ? offs[0] : int'($urandom % W);   // some share the true bin
        locs.push_back(LOC_W'((w*int'(W) + o)*int'(STRIDE) + int'($urandom % STRIDE)));
        offs.push_back(o);
      end
      foreach (offs[j]) active[offs[j]] = 1'b1;
      foreach (active[o]) mask[o] = (ref_sum(rd, w, o) >= thr);
      foreach (locs[j]) if (mask[offs[j]]) exp_loc.push_back(locs[j]);
      if (kind == 1) check(mask[offs[0]] == 1'b1, $sformatf("true location bin fails the reference filter: sum %0d thr %0d p %0d off %0d", ref_sum(rd, w, offs[0]), thr, p, offs[0]));
    end
    exp_mask.push_back(mask);
    exp_win.push_back(w);
    // command: driven at the falling edge, taken at the next rising edge
    @(negedge clk);
    cmd_read_seq = rd;
    cmd_window   = WIN_W'(w);
    cmd_e_milli  = E_W'(e_milli);
    cmd_nseeds   = CNT_W'(nseed);
    cmd_valid    = 1'b1;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 1'b0;
    foreach (locs[j]) begin
      seed_loc     = locs[j];
      seed_bin_off = OFF_W'(offs[j]);
      seed_valid   = 1'b1;
      while (!seed_ready) @(negedge clk);
      @(negedge clk);
    end
    seed_valid = 1'b0;
    if (timed && nseed > 0) begin
      first_req_cycle = -1;
      while (!bmw_valid) begin
        @(posedge clk);
        if (first_req_cycle < 0 && mem_req_valid && mem_req_ready) first_req_cycle = cycle;
      end
      bmw_cycle = cycle;
      check(bmw_cycle - first_req_cycle == int'(NTOK) + 2 + int'(LAT),
            $sformatf("unstalled window took %0d cycles from first row request to bitmask, expected %0d",
                      bmw_cycle - first_req_cycle, NTOK + 2 + LAT));
    end
  endtask

  // count row requests per window
  int reqs_this_window = 0;
  always @(posedge clk) begin
    if (!rst_n) reqs_this_window <= 0;
    else if (mem_req_valid && mem_req_ready) reqs_this_window <= reqs_this_window + 1;
    if (rst_n && bmw_valid) begin
      if (reqs_this_window != 0) check(reqs_this_window == int'(NTOK), "rows read per window");
      reqs_this_window <= (mem_req_valid && mem_req_ready) ? 1 : 0;
    end
  end

  initial begin
    int es [6] = '{0, 10, 20, 30, 40, 50};
    // reference genome and its bitvectors
    for (int i = 0; i < int'(GLEN); i++) genome[i] = 2'($urandom);
    for (int i = 0; i < int'(NWIN*ROWS); i++) u_mem.rows[i] = '0;
    for (int b = 0; b < int'(NWIN*W); b++)
      for (int q = b*int'(STRIDE); q + int'(TOKEN_LEN) <= b*int'(STRIDE) + int'(BINSZ); q++) begin
        automatic int t = 0;
        for (int k = 0; k < int'(TOKEN_LEN); k++) t = t*4 + int'(genome[q+k]);
        u_mem.rows[(b / int'(W))*ROWS + t][b % int'(W)] = 1'b1;
      end
    repeat (10) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // phase 1: no back-pressure, timed
    for (int i = 0; i < int'(NCMD1); i++) begin
      run_cmd(i % 2, es[i % 6], (i == 2) ? 0 : ((i == 4) ? 2 : 1), 1'b1);
      while (exp_loc.size() != 0) @(posedge clk);
    end
    // phase 2: DRAM stalls and a slow read mapper, commands back to back
    stall_en    <= 1'b1;
    slow_mapper <= 1'b1;
    for (int i = 0; i < int'(NCMD2); i++)
      run_cmd(int'($urandom % NWIN), es[$urandom % 6], (i % 6 == 3) ? 0 : ((i % 5 == 4) ? 2 : 1), 1'b0);
    while (exp_loc.size() != 0 || exp_mask.size() != 0) @(posedge clk);
    repeat (10) @(posedge clk);
    // every true location must have been kept (no false positives)
    check(n_true_kept >= true_locs.size(), $sformatf("true locations kept %0d of %0d", n_true_kept, true_locs.size()));
    check(n_skip > 0,      "no empty window was skipped");
    check(n_mem_stall > 0, "no DRAM stall happened");
    check(n_out_stall > 0, "no checker-busy stall happened");
    check(n_keep > 0,      "no seed location was kept");
    check(n_discard > 0,   "no seed location was discarded");
    $display("events: skip=%0d mem_stall=%0d out_stall=%0d keep=%0d discard=%0d true_kept=%0d",
             n_skip, n_mem_stall, n_out_stall, n_keep, n_discard, n_true_kept);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (generator state %0d, checker left %0d, expected locations %0d, bitmasks %0d)",
             dut.u_gen.state, dut.u_check.left, exp_loc.size(), exp_mask.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
