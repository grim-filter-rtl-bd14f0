// token_extractor: turns a read sequence into its stream of tokens.
//
// A read of READ_LEN bases contains READ_LEN-(TOKEN_LEN-1) overlapping
// tokens; token k is bases k .. k+TOKEN_LEN-1. Each token value is the row
// number of that token's existence bits in the bitvector layout, with the
// first base of the token in the most significant position (AAAAA is row 0,
// AAAAC row 1, AAACA row 4, TTTTT row 1023, as in the paper's figures).
//
// Interface: `start` (one cycle, while idle) loads `read_seq`, base i in bits
// [2i+1:2i] coded A=0 C=1 G=2 T=3. The tokens then leave on a valid/ready
// stream, first to last, one per cycle while `tok_ready` is high; `tok_last`
// marks the final one. The first token is valid the cycle after `start`.
// The paper only says that every token of the read is extracted; the
// shift-register form and the handshake are this design's choice.
module token_extractor #(
  parameter int unsigned READ_LEN  = grim_pkg::READ_LEN,
  parameter int unsigned TOKEN_LEN = grim_pkg::TOKEN_LEN
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [2*READ_LEN-1:0]    read_seq,
  output logic                     busy,
  output logic                     tok_valid,
  input  logic                     tok_ready,
  output logic [2*TOKEN_LEN-1:0]   tok_value,
  output logic                     tok_last
);
  localparam int unsigned NTOK  = READ_LEN - (TOKEN_LEN - 1);
  localparam int unsigned CNT_W = $clog2(NTOK + 1);

  logic [2*READ_LEN-1:0] shreg;   // remaining bases, next token at the bottom
  logic [CNT_W-1:0]      left;    // tokens still to send

  assign busy      = (left != '0);
  assign tok_valid = busy;
  assign tok_last  = (left == CNT_W'(1));

  // Base 0 of the token goes to the top bits of the row number.
  always_comb begin
    for (int b = 0; b < TOKEN_LEN; b++)
      tok_value[2*(TOKEN_LEN-1-b) +: 2] = shreg[2*b +: 2];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg <= '0;
      left  <= '0;
    end else if (start && !busy) begin
      shreg <= read_seq;
      left  <= CNT_W'(NTOK);
    end else if (tok_valid && tok_ready) begin
      shreg <= shreg >> 2;
      left  <= left - CNT_W'(1);
    end
  end

endmodule
