// grim_vault_logic: the custom GRIM-Filter logic in one vault's slice of the
// logic layer.
//
// A vault is a stack of banks (one per DRAM layer) plus a slice of the logic
// layer. Because bitvectors are stored column-major, one row read in the vault
// returns the existence bits of a single token for BINS consecutive bins.
// This block holds the row data register those bits land in, one
// grim_logic_module per bin, and the seed location filter bitmask register
// into which every module writes its bit. All modules run in lockstep on the
// same token, as the paper describes.
//
// Interface and timing: `row_load` with `row_in` is one token's row coming up
// from the bank; one cycle later the row data register presents it and each
// module counts its bit, so a row arriving in cycle c is in the sums in cycle
// c+2. `clear` starts a new bin window (accumulators to zero). `active_mask`
// marks the bins holding at least one seed location. `compare` (one cycle,
// after the last row has been counted) copies every module's comparison with
// `threshold` into `bitmask`, which holds until the next compare. `sums` is
// exposed for observation.
module grim_vault_logic #(
  parameter int unsigned BINS  = grim_pkg::BINS_PER_VAULT,
  parameter int unsigned ACC_W = $clog2(grim_pkg::READ_LEN)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic [BINS-1:0]       active_mask,
  input  logic                  row_load,
  input  logic [BINS-1:0]       row_in,
  input  logic                  compare,
  input  logic [ACC_W-1:0]      threshold,
  output logic                  row_counted,
  output logic [BINS-1:0]       bitmask,
  output logic [BINS*ACC_W-1:0] sums
);
  logic [BINS-1:0] row_q;
  logic            row_valid;
  logic [BINS-1:0] filter_bits;

  row_data_register #(.WIDTH(BINS)) u_row_reg (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (clear),
    .load      (row_load),
    .row_in    (row_in),
    .row_q     (row_q),
    .row_valid (row_valid)
  );

  for (genvar b = 0; b < BINS; b++) begin : g_bin
    grim_logic_module #(.ACC_W(ACC_W)) u_mod (
      .clk        (clk),
      .rst_n      (rst_n),
      .clear      (clear),
      .active     (active_mask[b]),
      .inc_en     (row_valid),
      .exist_bit  (row_q[b]),
      .threshold  (threshold),
      .sum        (sums[b*ACC_W +: ACC_W]),
      .filter_bit (filter_bits[b])
    );
  end

  // The row counted in this cycle is in the sums from the next one on.
  assign row_counted = row_valid;

  // Seed location filter bitmask register.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      bitmask <= '0;
    else if (compare)
      bitmask <= filter_bits;
  end

endmodule
