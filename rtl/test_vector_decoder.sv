// Test vector decoder of the BIST: 3 inputs, 12 outputs.
//
// The counter value idx (0..4) selects one of the five test vectors. The
// outputs are the 8 stimulus bits for a pair of adjacent cells (x, y, ci, pi,
// two bits each) and the 4 expected-response bits of that pair (co, po). Bit
// [1] of each field is for the odd-indexed row or column, bit [0] for the
// even one; a field of 00 or 11 applies to all rows or columns alike.
//
//   idx  x   y   ci  pi | co  po   cell test patterns (xy, cin, pin)
//    0   11  00  00  11 | 00  11   all cells (0,0,1)
//    1   01  11  10  00 | 10  00   rows alternate (1,0,0) / (0,1,1)
//    2   10  11  01  11 | 01  11   the same, rows swapped
//    3   11  10  11  10 | 11  01   checkerboard (0,1,0) / (1,0,1)
//    4   11  01  00  01 | 00  10   the same, swapped
//
// The table is the paper's Table II, read with the first value of a pair
// belonging to the odd-indexed (left) cell; with that reading every entry of
// the table matches what the array computes (checked by tb_dft_array_mult).
// The paper minimises the 12 functions with Karnaugh maps; here they are
// written as a case statement and left to synthesis. Indexes 5 to 7 are
// never used; they give all zeros (this design's choice). Combinational.
module test_vector_decoder
  import mult_bist_pkg::*;
(
  input  logic [CNT_W-1:0] idx,
  output test_vector_t     tv
);
  always_comb begin
    unique case (idx)
      3'd0:    tv = '{x: 2'b11, y: 2'b00, ci: 2'b00, pi: 2'b11, co: 2'b00, po: 2'b11};
      3'd1:    tv = '{x: 2'b01, y: 2'b11, ci: 2'b10, pi: 2'b00, co: 2'b10, po: 2'b00};
      3'd2:    tv = '{x: 2'b10, y: 2'b11, ci: 2'b01, pi: 2'b11, co: 2'b01, po: 2'b11};
      3'd3:    tv = '{x: 2'b11, y: 2'b10, ci: 2'b11, pi: 2'b10, co: 2'b11, po: 2'b01};
      3'd4:    tv = '{x: 2'b11, y: 2'b01, ci: 2'b00, pi: 2'b01, co: 2'b00, po: 2'b10};
      default: tv = '0;
    endcase
  end
endmodule
