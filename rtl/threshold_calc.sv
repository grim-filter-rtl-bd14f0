// threshold_calc: accumulation sum threshold for a given error tolerance.
//
// The paper's threshold equation: a read has read_length-(n-1) tokens; at
// most ceil(read_length * e) errors are tolerated, and each may spoil up to n
// tokens (a deletion or substitution touches n overlapping tokens), so
//     threshold = read_length - (n-1) - n * ceil(read_length * e).
// A bin whose accumulation sum is below this cannot hold an acceptable match.
//
// Interface: combinational. `e_milli` is the error tolerance in thousandths
// (50 means e = 0.05). The result saturates at zero when the error budget
// covers every token. READ_LEN and TOKEN_LEN are fixed by parameters, so the
// ceiling is a small constant divide. Encoding e in thousandths is this
// design's choice; the paper evaluates e = 0.00 to 0.05 in steps of 0.01.
// The ceiling is applied to read_length * e, as the paper's text states.
module threshold_calc #(
  parameter int unsigned READ_LEN  = grim_pkg::READ_LEN,
  parameter int unsigned TOKEN_LEN = grim_pkg::TOKEN_LEN,
  parameter int unsigned ACC_W     = $clog2(READ_LEN)
) (
  input  logic [grim_pkg::E_W-1:0] e_milli,
  output logic [ACC_W-1:0]         threshold,
  output logic [ACC_W-1:0]         max_errors
);
  localparam int unsigned NTOK = READ_LEN - (TOKEN_LEN - 1);
  localparam int unsigned PW   = $clog2(READ_LEN * 1000 + 1000);

  logic [PW-1:0] product;
  logic [PW-1:0] errors;
  logic [PW-1:0] lost;

  always_comb begin
    product    = PW'(READ_LEN) * PW'(e_milli);
    errors     = (product + PW'(999)) / PW'(1000);   // ceil(read_length * e)
    lost       = errors * PW'(TOKEN_LEN);             // tokens that may not match
    threshold  = (lost >= PW'(NTOK)) ? '0 : ACC_W'(PW'(NTOK) - lost);
    max_errors = (errors > PW'(READ_LEN)) ? ACC_W'(READ_LEN) : ACC_W'(errors);
  end

endmodule
