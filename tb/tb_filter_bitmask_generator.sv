// tb_filter_bitmask_generator: checks the filter bitmask generator at a small
// size (2 vaults x 8 bins, 20-base reads, 3-base tokens, 4 windows).
//
// The DRAM model is filled with random bitvectors. Each command sends a
// random read, window, error tolerance and a set of seed bin offsets; the
// bitmask offered on bm_* must equal, for every bin holding a seed, whether
// the number of the read's tokens present in that bin's bitvector reaches
// read_length-(n-1) - n*ceil(read_length*e), and 0 for the other bins. It
// also checks: exactly 18 row requests per checked window with the right
// window and row numbers, none for a window with no seed (skipped), the
// bitmask offered tokens+latency+2 cycles after the first request when the
// memory never stalls, and that the bitmask waits while bm_ready is low.
module tb_filter_bitmask_generator;
  localparam int unsigned NV = 2, BPV = 8, W = NV*BPV, RL = 20, N = 3, NB = 64;
  localparam int unsigned NTOK = RL - N + 1, ROWS = 1 << (2*N), LAT = 2;
  localparam int unsigned WIN_W = 2, OFF_W = 4, CNT_W = 9, ACC_W = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic cmd_valid = 1'b0, cmd_ready, seed_valid = 1'b0, seed_ready;
  logic [2*RL-1:0] cmd_read_seq = '0;
  logic [WIN_W-1:0] cmd_window = '0;
  logic [9:0] cmd_e_milli = '0;
  logic [CNT_W-1:0] cmd_nseeds = '0;
  logic [OFF_W-1:0] seed_bin_off = '0;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [WIN_W-1:0] mem_req_window, bm_window;
  logic [2*N-1:0] mem_req_row;
  logic [W-1:0] mem_rsp_data, bm_data;
  logic bm_valid, bm_ready = 1'b1;
  logic [CNT_W-1:0] bm_nseeds;
  logic [ACC_W-1:0] threshold;
  logic ev_skip, ev_out_stall, ev_mem_stall;
  logic stall_en = 1'b0;
  int checks = 0, failures = 0, cycle = 0, nreq = 0, first_req = -1;
  int exp_rows [$];
  int exp_window = 0;

  filter_bitmask_generator #(.NUM_VAULTS(NV), .BINS_PER_VAULT(BPV), .READ_LEN(RL),
    .TOKEN_LEN(N), .NUM_BINS(NB), .SEED_DEPTH(256)) dut (.*);

  dram_bitvector_model #(.WINDOW(W), .WIN_W(WIN_W), .ROW_W(2*N), .NWIN(NB/W), .LATENCY(LAT),
                         .STALL_PCT(40)) u_mem (
    .clk(clk), .stall_en(stall_en), .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_window(mem_req_window), .req_row(mem_req_row), .rsp_valid(mem_rsp_valid),
    .rsp_data(mem_rsp_data));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cycle, what); end
  endtask

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && mem_req_valid && mem_req_ready) begin
      if (first_req < 0) first_req = cycle;
      nreq++;
      check(int'(mem_req_window) == exp_window, "request window");
      if (exp_rows.size() == 0) check(0, "extra row request");
      else check(int'(mem_req_row) == exp_rows.pop_front(), "request row = token value");
    end
  end

  initial begin
    repeat (5) @(negedge clk);
    for (int i = 0; i < int'(ROWS*NB/W); i++) u_mem.rows[i] = W'($urandom);
    rst_n = 1'b1;
    for (int c = 0; c < 40; c++) begin
      automatic logic [2*RL-1:0] rd;
      automatic int w = int'($urandom % (NB/W)), e = 10 * int'($urandom % 6), ns = (c % 7 == 3) ? 0 : 1 + int'($urandom % 6);
      automatic int errs = int'($ceil(real'(RL) * real'(e) / 1000.0)), thr = int'(NTOK) - int'(N)*errs;
      automatic logic [W-1:0] act = '0, expm = '0;
      automatic int offs [$];
      automatic int t_req;
      for (int i = 0; i < int'(RL); i++) rd[2*i +: 2] = 2'($urandom);
      if (thr < 0) thr = 0;
      stall_en = (c >= 10);
      exp_window = w;
      exp_rows.delete();
      if (ns > 0) for (int k = 0; k < int'(NTOK); k++) begin
        automatic int t = 0;
        for (int b = 0; b < int'(N); b++) t = t*4 + int'(rd[2*(k+b) +: 2]);
        exp_rows.push_back(t);
      end
      for (int j = 0; j < ns; j++) begin
        offs.push_back(int'($urandom % W));
        act[offs[j]] = 1'b1;
      end
      for (int b = 0; b < int'(W); b++) if (act[b]) begin
        automatic int s = 0;
        for (int k = 0; k < int'(NTOK); k++) s += int'(u_mem.rows[w*ROWS + exp_rows[k]][b]);
        expm[b] = (s >= thr);
      end
      nreq = 0; first_req = -1;
      @(negedge clk);
      cmd_read_seq = rd; cmd_window = WIN_W'(w); cmd_e_milli = 10'(e); cmd_nseeds = CNT_W'(ns);
      cmd_valid = 1'b1;
      while (!cmd_ready) @(negedge clk);
      @(negedge clk);
      cmd_valid = 1'b0;
      foreach (offs[j]) begin
        seed_bin_off = OFF_W'(offs[j]);
        seed_valid = 1'b1;
        while (!seed_ready) @(negedge clk);
        @(negedge clk);
      end
      seed_valid = 1'b0;
      bm_ready = (c % 3 != 0);
      while (!bm_valid) @(negedge clk);
      t_req = cycle;
      if (!bm_ready) begin
        repeat (3) @(negedge clk);
        check(bm_valid && bm_data == expm, "bitmask held while bm_ready is low");
        bm_ready = 1'b1;
      end
      check(bm_data == expm, $sformatf("window %0d bitmask %h expected %h", w, bm_data, expm));
      check(int'(bm_window) == w && int'(bm_nseeds) == ns, "bitmask window and seed count");
      check(int'(threshold) == thr, "threshold");
      check(nreq == ((ns > 0) ? int'(NTOK) : 0), $sformatf("%0d row requests", nreq));
      if (ns > 0 && c < 10)
        check(t_req - first_req == int'(NTOK + LAT + 2), $sformatf("bitmask %0d cycles after first request", t_req - first_req));
      @(negedge clk);
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
