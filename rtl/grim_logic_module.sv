// grim_logic_module: the per-bin GRIM-Filter logic (incrementer, accumulator,
// comparator).
//
// One instance serves one bin of the current bin window. For every token of
// the read, the existence bit of that token in this bin's bitvector arrives
// from the row data register; the incrementer adds one to the accumulator
// when the bit is set. After the last token the accumulator holds the
// accumulation sum Sum_z, and the comparator reports Sum_z >= threshold as
// the seed location filter bit. This is the structure the paper gives; the
// accumulator is ACC_W = ceil(log2(read_length)) bits wide (7 for 100-base
// reads), and the comparator has the same width.
//
// Interface and timing: `clear` zeroes the accumulator at the start of a
// window (it wins over `inc_en`). `inc_en` is high for one cycle per token,
// with that token's bit on `exist_bit`; the new sum is visible the next
// cycle. `active` says whether the bin holds any seed location; a bin that
// holds none (an "empty bin") leaves its accumulator at zero and always
// answers 0, since there is nothing in it to send to alignment. That gating
// is this design's choice; the paper only says such modules wait in lockstep.
// `filter_bit` is combinational from the accumulator and `threshold`.
module grim_logic_module #(
  parameter int unsigned ACC_W = $clog2(grim_pkg::READ_LEN)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             active,
  input  logic             inc_en,
  input  logic             exist_bit,
  input  logic [ACC_W-1:0] threshold,
  output logic [ACC_W-1:0] sum,
  output logic             filter_bit
);
  logic [ACC_W-1:0] acc;
  logic [ACC_W-1:0] acc_inc;

  assign acc_inc    = acc + ACC_W'(1);                 // incrementer
  assign sum        = acc;
  assign filter_bit = active && (acc >= threshold);    // comparator

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      acc <= '0;
    else if (clear)
      acc <= '0;
    else if (inc_en && exist_bit && active)
      acc <= acc_inc;                                  // accumulator
  end

endmodule
