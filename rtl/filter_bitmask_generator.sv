// filter_bitmask_generator: the in-memory half of GRIM-Filter. For one read
// and one bin window it produces the seed location filter bitmask.
//
// The read mapper hands over a read sequence, the index of a window of
// WINDOW = NUM_VAULTS*BINS_PER_VAULT consecutive bins, the error tolerance and
// the seed locations that fall in the window. The generator then
//   1. marks the bins that hold a seed location (the others are empty bins),
//   2. walks the read token by token; for each token it reads, in every vault
//      at once, the DRAM row that holds that token's existence bits for the
//      window's bins, and every per-bin logic module counts its bit,
//   3. compares every bin's accumulation sum with the threshold and latches
//      the results as the bitmask: 1 means "align the seeds in this bin".
// A window holding no seed location is not checked at all: no row is read and
// the bitmask is all zeros. This follows the paper's operation; the command
// and memory handshakes, the seed count in the command and the empty-bin
// gating are this design's choices.
//
// Interfaces (all valid/ready, a transfer when both are high):
//   cmd   : read sequence, window index, e in thousandths, number of seeds
//   seed  : bin offset inside the window, one per seed, cmd_nseeds of them
//   mem   : request {window, row}; the memory answers every request, in order,
//           with one mem_rsp_valid cycle carrying WINDOW existence bits
//           (bit b = bin window*WINDOW + b; vault v owns bits v*BPV .. )
//   bm    : the finished bitmask, with its window index and seed count
// Timing: one row request per cycle while the memory accepts; a response in
// cycle c is counted in cycle c+1; the bitmask is offered two cycles after
// the last response. ev_* are one-cycle event pulses for statistics.
module filter_bitmask_generator #(
  parameter int unsigned NUM_VAULTS     = grim_pkg::NUM_VAULTS,
  parameter int unsigned BINS_PER_VAULT = grim_pkg::BINS_PER_VAULT,
  parameter int unsigned READ_LEN       = grim_pkg::READ_LEN,
  parameter int unsigned TOKEN_LEN      = grim_pkg::TOKEN_LEN,
  parameter int unsigned NUM_BINS       = grim_pkg::NUM_BINS,
  parameter int unsigned SEED_DEPTH     = grim_pkg::SEED_DEPTH,
  // derived
  parameter int unsigned WINDOW         = NUM_VAULTS * BINS_PER_VAULT,
  parameter int unsigned WIN_W          = $clog2((NUM_BINS + WINDOW - 1) / WINDOW),
  parameter int unsigned OFF_W          = $clog2(WINDOW),
  parameter int unsigned CNT_W          = $clog2(SEED_DEPTH + 1),
  parameter int unsigned ACC_W          = $clog2(READ_LEN)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // command
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  logic [2*READ_LEN-1:0]    cmd_read_seq,
  input  logic [WIN_W-1:0]         cmd_window,
  input  logic [grim_pkg::E_W-1:0] cmd_e_milli,
  input  logic [CNT_W-1:0]         cmd_nseeds,
  // seed bins of the window
  input  logic                     seed_valid,
  output logic                     seed_ready,
  input  logic [OFF_W-1:0]         seed_bin_off,
  // bitvector row reads, all vaults in lockstep
  output logic                     mem_req_valid,
  input  logic                     mem_req_ready,
  output logic [WIN_W-1:0]         mem_req_window,
  output logic [2*TOKEN_LEN-1:0]   mem_req_row,
  input  logic                     mem_rsp_valid,
  input  logic [WINDOW-1:0]        mem_rsp_data,
  // finished bitmask
  output logic                     bm_valid,
  input  logic                     bm_ready,
  output logic [WINDOW-1:0]        bm_data,
  output logic [WIN_W-1:0]         bm_window,
  output logic [CNT_W-1:0]         bm_nseeds,
  output logic [ACC_W-1:0]         threshold,
  // events
  output logic                     ev_skip,
  output logic                     ev_out_stall,
  output logic                     ev_mem_stall
);
  localparam int unsigned NTOK  = READ_LEN - (TOKEN_LEN - 1);
  localparam int unsigned TOK_W = $clog2(NTOK + 1);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_RUN, S_COMPARE, S_OUT} state_e;
  state_e state;

  logic [2*READ_LEN-1:0]    read_q;
  logic [WIN_W-1:0]         window_q;
  logic [grim_pkg::E_W-1:0] e_q;
  logic [CNT_W-1:0]         nseeds_q;
  logic [CNT_W-1:0]         seeds_left;
  logic [WINDOW-1:0]        active;
  logic [TOK_W-1:0]         rows_counted;
  logic                     clear_acc;
  logic                     tok_start;
  logic                     tok_busy, tok_valid, tok_last;
  logic [2*TOKEN_LEN-1:0]   tok_value;
  logic [NUM_VAULTS-1:0]    row_counted;
  logic                     compare;

  // ------------------------------------------------------------ control
  assign cmd_ready  = (state == S_IDLE);
  assign seed_ready = (state == S_LOAD);
  assign clear_acc  = cmd_valid && cmd_ready;
  assign compare    = (state == S_COMPARE);
  assign bm_valid   = (state == S_OUT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      read_q       <= '0;
      window_q     <= '0;
      e_q          <= '0;
      nseeds_q     <= '0;
      seeds_left   <= '0;
      active       <= '0;
      rows_counted <= '0;
      tok_start    <= 1'b0;
    end else begin
      tok_start <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          read_q       <= cmd_read_seq;
          window_q     <= cmd_window;
          e_q          <= cmd_e_milli;
          nseeds_q     <= cmd_nseeds;
          seeds_left   <= cmd_nseeds;
          active       <= '0;
          rows_counted <= '0;
          // An empty window is not checked: straight to the (all-zero) compare.
          state        <= (cmd_nseeds == '0) ? S_COMPARE : S_LOAD;
        end
        S_LOAD: if (seed_valid) begin
          active[seed_bin_off] <= 1'b1;
          seeds_left           <= seeds_left - CNT_W'(1);
          if (seeds_left == CNT_W'(1)) begin
            state     <= S_RUN;
            tok_start <= 1'b1;
          end
        end
        S_RUN: if (row_counted[0]) begin
          rows_counted <= rows_counted + TOK_W'(1);
          if (rows_counted == TOK_W'(NTOK - 1))
            state <= S_COMPARE;       // last row is in the sums next cycle
        end
        S_COMPARE: state <= S_OUT;
        S_OUT: if (bm_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------- token walk and reads
  token_extractor #(.READ_LEN(READ_LEN), .TOKEN_LEN(TOKEN_LEN)) u_tokens (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (tok_start),
    .read_seq  (read_q),
    .busy      (tok_busy),
    .tok_valid (tok_valid),
    .tok_ready (mem_req_ready),
    .tok_value (tok_value),
    .tok_last  (tok_last)
  );

  assign mem_req_valid  = tok_valid;
  assign mem_req_row    = tok_value;
  assign mem_req_window = window_q;

  threshold_calc #(.READ_LEN(READ_LEN), .TOKEN_LEN(TOKEN_LEN), .ACC_W(ACC_W)) u_thr (
    .e_milli    (e_q),
    .threshold  (threshold),
    .max_errors ()
  );

  // ------------------------------------------------------------ vaults
  for (genvar v = 0; v < NUM_VAULTS; v++) begin : g_vault
    grim_vault_logic #(.BINS(BINS_PER_VAULT), .ACC_W(ACC_W)) u_vault (
      .clk         (clk),
      .rst_n       (rst_n),
      .clear       (clear_acc),
      .active_mask (active[v*BINS_PER_VAULT +: BINS_PER_VAULT]),
      .row_load    (mem_rsp_valid),
      .row_in      (mem_rsp_data[v*BINS_PER_VAULT +: BINS_PER_VAULT]),
      .compare     (compare),
      .threshold   (threshold),
      .row_counted (row_counted[v]),
      .bitmask     (bm_data[v*BINS_PER_VAULT +: BINS_PER_VAULT]),
      .sums        ()
    );
  end

  assign bm_window = window_q;
  assign bm_nseeds = nseeds_q;

  // ------------------------------------------------------------ events
  assign ev_skip      = (state == S_IDLE) && cmd_valid && (cmd_nseeds == '0);
  assign ev_out_stall = bm_valid && !bm_ready;
  assign ev_mem_stall = mem_req_valid && !mem_req_ready;

  // ------------------------------------------------------- protocol rules
  // A row request holds still until the memory takes it.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req_row));
  // Rows only come back while a window is being checked.
  a_rsp_in_run: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> state == S_RUN);
  // A seed offset must lie inside the window.
  a_seed_in_window: assert property (@(posedge clk) disable iff (!rst_n)
    seed_valid && seed_ready |-> 32'(seed_bin_off) < WINDOW);

endmodule
