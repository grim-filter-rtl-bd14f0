// grim_filter_top: GRIM-Filter seed location filtering in the logic layer of
// a 3D-stacked memory, from read and seed locations in to seed locations to
// align out.
//
// For each (read, bin window) command the read mapper also hands over the
// seed locations that fall in the window. They are stored in a seed buffer
// while the filter bitmask generator marks their bins, reads one bitvector
// row per token of the read from the DRAM stack (all vaults in lockstep),
// accumulates the existence bits in one logic module per bin and compares the
// sums with the error-tolerance threshold. The finished bitmask is written
// out to the bitmask buffer in DRAM (the `bmw_*` port) and handed to the seed
// location checker, which passes on only the seed locations whose bin bit is
// set. While the checker and the mapper work through one window, the
// generator already runs the next one; when the checker is still busy with
// the previous window, the generator holds its finished bitmask (a stall).
//
// The DRAM stack (banks, row buffers, TSVs) is outside this module: its row
// read port is `mem_*`. A row request {window, token row} must be answered,
// in order, by one `mem_rsp_valid` cycle with WINDOW existence bits, bit b
// belonging to bin window*WINDOW + b (vault v holds bits v*BPV and up).
// Defaults are the paper's: token size 5, 100-base reads, 450 x 2^16 bins,
// a 4096-bin window. Eight vaults of 512 bins, the handshakes, the seed
// buffer of 256 entries and the checker in logic (the paper runs the checker
// on the host) are this design's choices. ev_* pulse once per event.
module grim_filter_top #(
  parameter int unsigned NUM_VAULTS     = grim_pkg::NUM_VAULTS,
  parameter int unsigned BINS_PER_VAULT = grim_pkg::BINS_PER_VAULT,
  parameter int unsigned READ_LEN       = grim_pkg::READ_LEN,
  parameter int unsigned TOKEN_LEN      = grim_pkg::TOKEN_LEN,
  parameter int unsigned NUM_BINS       = grim_pkg::NUM_BINS,
  parameter int unsigned SEED_DEPTH     = grim_pkg::SEED_DEPTH,
  parameter int unsigned LOC_W          = grim_pkg::LOC_W,
  // derived
  parameter int unsigned WINDOW         = NUM_VAULTS * BINS_PER_VAULT,
  parameter int unsigned WIN_W          = $clog2((NUM_BINS + WINDOW - 1) / WINDOW),
  parameter int unsigned OFF_W          = $clog2(WINDOW),
  parameter int unsigned CNT_W          = $clog2(SEED_DEPTH + 1),
  parameter int unsigned ACC_W          = $clog2(READ_LEN)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // read mapper: one read and one bin window per command
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  logic [2*READ_LEN-1:0]    cmd_read_seq,
  input  logic [WIN_W-1:0]         cmd_window,
  input  logic [grim_pkg::E_W-1:0] cmd_e_milli,
  input  logic [CNT_W-1:0]         cmd_nseeds,
  // read mapper: the command's seed locations
  input  logic                     seed_valid,
  output logic                     seed_ready,
  input  logic [LOC_W-1:0]         seed_loc,
  input  logic [OFF_W-1:0]         seed_bin_off,
  // DRAM stack: bitvector row reads
  output logic                     mem_req_valid,
  input  logic                     mem_req_ready,
  output logic [WIN_W-1:0]         mem_req_window,
  output logic [2*TOKEN_LEN-1:0]   mem_req_row,
  input  logic                     mem_rsp_valid,
  input  logic [WINDOW-1:0]        mem_rsp_data,
  // DRAM stack: bitmask buffer writes
  output logic                     bmw_valid,
  output logic [WIN_W-1:0]         bmw_window,
  output logic [WINDOW-1:0]        bmw_data,
  // read mapper: seed locations to align
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [LOC_W-1:0]         out_loc,
  // events
  output logic                     ev_skip,
  output logic                     ev_out_stall,
  output logic                     ev_mem_stall,
  output logic                     ev_keep,
  output logic                     ev_discard
);
  logic              gen_seed_ready;
  logic              fifo_in_ready;
  logic              fifo_out_valid, fifo_out_ready;
  logic [LOC_W+OFF_W-1:0] fifo_out_data;
  logic              bm_valid, bm_ready;
  logic [WINDOW-1:0] bm_data;
  logic [WIN_W-1:0]  bm_window;
  logic [CNT_W-1:0]  bm_nseeds;
  logic [ACC_W-1:0]  threshold;

  // A seed is taken when both the generator and the seed buffer can take it.
  assign seed_ready = gen_seed_ready && fifo_in_ready;

  filter_bitmask_generator #(
    .NUM_VAULTS(NUM_VAULTS), .BINS_PER_VAULT(BINS_PER_VAULT), .READ_LEN(READ_LEN),
    .TOKEN_LEN(TOKEN_LEN), .NUM_BINS(NUM_BINS), .SEED_DEPTH(SEED_DEPTH)
  ) u_gen (
    .clk            (clk),
    .rst_n          (rst_n),
    .cmd_valid      (cmd_valid),
    .cmd_ready      (cmd_ready),
    .cmd_read_seq   (cmd_read_seq),
    .cmd_window     (cmd_window),
    .cmd_e_milli    (cmd_e_milli),
    .cmd_nseeds     (cmd_nseeds),
    .seed_valid     (seed_valid && fifo_in_ready),
    .seed_ready     (gen_seed_ready),
    .seed_bin_off   (seed_bin_off),
    .mem_req_valid  (mem_req_valid),
    .mem_req_ready  (mem_req_ready),
    .mem_req_window (mem_req_window),
    .mem_req_row    (mem_req_row),
    .mem_rsp_valid  (mem_rsp_valid),
    .mem_rsp_data   (mem_rsp_data),
    .bm_valid       (bm_valid),
    .bm_ready       (bm_ready),
    .bm_data        (bm_data),
    .bm_window      (bm_window),
    .bm_nseeds      (bm_nseeds),
    .threshold      (threshold),
    .ev_skip        (ev_skip),
    .ev_out_stall   (ev_out_stall),
    .ev_mem_stall   (ev_mem_stall)
  );

  sync_fifo #(.WIDTH(LOC_W + OFF_W), .DEPTH(SEED_DEPTH)) u_seed_buf (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (seed_valid && gen_seed_ready),
    .in_ready  (fifo_in_ready),
    .in_data   ({seed_loc, seed_bin_off}),
    .out_valid (fifo_out_valid),
    .out_ready (fifo_out_ready),
    .out_data  (fifo_out_data)
  );

  seed_location_checker #(
    .WINDOW(WINDOW), .LOC_W(LOC_W), .CNT_W(CNT_W)
  ) u_check (
    .clk        (clk),
    .rst_n      (rst_n),
    .bm_valid   (bm_valid),
    .bm_ready   (bm_ready),
    .bm_data    (bm_data),
    .bm_nseeds  (bm_nseeds),
    .seed_valid (fifo_out_valid),
    .seed_ready (fifo_out_ready),
    .seed_loc   (fifo_out_data[OFF_W +: LOC_W]),
    .seed_off   (fifo_out_data[OFF_W-1:0]),
    .out_valid  (out_valid),
    .out_ready  (out_ready),
    .out_loc    (out_loc),
    .ev_keep    (ev_keep),
    .ev_discard (ev_discard)
  );

  // The bitmask goes to the DRAM bitmask buffer as the checker takes it.
  assign bmw_valid  = bm_valid && bm_ready;
  assign bmw_window = bm_window;
  assign bmw_data   = bm_data;

endmodule
