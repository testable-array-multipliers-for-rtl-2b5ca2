// Shared types and constants of the C-testable array multiplier and its
// built-in self-test (BIST).
//
// The five test vectors are defined for a pair of adjacent multiplier cells:
// every per-row or per-column value is a 2-bit field whose bit [1] belongs to
// the odd-indexed row/column (the more significant, left-hand one in the usual
// drawing) and bit [0] to the even-indexed one. Expanding a field over N bits
// means bit i takes field[i % 2]. A field of 2'b00 or 2'b11 is a value that is
// the same for every row or column.
package mult_bist_pkg;

  // Number of test vectors the whole test needs, independent of N.
  localparam int unsigned NUM_VECTORS = 5;

  // Width of the vector counter (a 3-bit counter covers the five vectors).
  localparam int unsigned CNT_W = 3;

  // One decoded test vector: 8 stimulus bits and 4 expected-response bits,
  // the 12 decoder outputs.
  typedef struct packed {
    logic [1:0] x;   // X operand bits, per row pair
    logic [1:0] y;   // Y operand bits, per column pair
    logic [1:0] ci;  // row-chain carry inputs of the right border, per row pair
    logic [1:0] pi;  // column-chain inputs of the top row, per column pair
    logic [1:0] co;  // expected carry outputs of the left border, per row pair
    logic [1:0] po;  // expected bottom-row partial products, per column pair
  } test_vector_t;

endpackage
