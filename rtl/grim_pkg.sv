// grim_pkg: constants, types and helper functions shared by the GRIM-Filter
// seed location filter.
//
// GRIM-Filter keeps, for every bin (an overlapping slice of the reference
// genome), a bitvector with one existence bit per possible token (a string of
// TOKEN_LEN bases). The bitvectors are stored column-major in DRAM: row r of
// a bank holds the existence bit of token r for many consecutive bins, so one
// row read delivers one token's bits for a whole bin window.
//
// Values taken from the paper: token size 5 (so 4^5 = 1024 bitvector rows),
// read length 100, 450 x 2^16 bins, a 4096-bin window (the 4096 bits per cycle
// that an HBM2 stack moves from a memory layer to the logic layer), 7-bit
// accumulators. Design choices of this RTL: base code A=0 C=1 G=2 T=3 (the row
// order printed in the bitvector figure: AAAAA, AAAAC, AAAAG, AAAAT, AAACA...),
// eight vaults of 512 bins each, 32-bit genome locations, the error tolerance
// given in thousandths, and a 256-entry seed buffer.
package grim_pkg;

  // ---------------------------------------------------------------- bases
  typedef enum logic [1:0] {
    BASE_A = 2'd0,
    BASE_C = 2'd1,
    BASE_G = 2'd2,
    BASE_T = 2'd3
  } base_e;

  // ------------------------------------------------------- paper numbers
  localparam int unsigned TOKEN_LEN      = 5;            // n
  localparam int unsigned READ_LEN       = 100;          // base pairs per read
  localparam int unsigned NUM_BINS       = 450 * 65536;  // t = 450 x 2^16
  localparam int unsigned WINDOW_BINS    = 4096;         // w, bits per row read

  // ------------------------------------------------------ design choices
  localparam int unsigned NUM_VAULTS     = 8;
  localparam int unsigned BINS_PER_VAULT = WINDOW_BINS / NUM_VAULTS;
  localparam int unsigned E_W            = 10;           // e in 1/1000, 0..1000
  localparam int unsigned LOC_W          = 32;           // genome location
  localparam int unsigned SEED_DEPTH     = 256;          // seeds per window

  // Number of tokens in a read: read_length - (n - 1).
  function automatic int unsigned num_tokens(int unsigned read_len, int unsigned n);
    return read_len - (n - 1);
  endfunction

  // Accumulation sum threshold (paper equation):
  //   read_length - (n-1) - n * ceil(read_length * e),   e = e_milli / 1000
  // clamped at zero.
  function automatic int unsigned sum_threshold(int unsigned read_len,
                                                int unsigned n,
                                                int unsigned e_milli);
    int unsigned errors;
    int unsigned tokens;
    errors = (read_len * e_milli + 999) / 1000;
    tokens = read_len - (n - 1);
    return (n * errors >= tokens) ? 0 : tokens - n * errors;
  endfunction

endpackage
