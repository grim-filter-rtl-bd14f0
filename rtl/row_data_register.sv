// row_data_register: the logic-layer copy of one DRAM row.
//
// When GRIM-Filter reads a bitvector row, the DRAM bank latches it in its row
// buffer and the row is then copied over the TSVs into this register in the
// vault's slice of the logic layer, where every per-bin logic module reads
// its own existence bit. The paper names this register and its place in the
// flow; its load/valid protocol here is this design's choice.
//
// Interface and timing: when `load` is high the register takes `row_in` at
// the clock edge and `row_valid` is high for the following cycle, marking
// that `row_q` holds a fresh row that the logic modules should count. A row
// stays in `row_q` until the next load. `clear` drops `row_valid`.
module row_data_register #(
  parameter int unsigned WIDTH = grim_pkg::BINS_PER_VAULT
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             load,
  input  logic [WIDTH-1:0] row_in,
  output logic [WIDTH-1:0] row_q,
  output logic             row_valid
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_q     <= '0;
      row_valid <= 1'b0;
    end else begin
      row_valid <= load && !clear;
      if (load)
        row_q <= row_in;
    end
  end

endmodule
