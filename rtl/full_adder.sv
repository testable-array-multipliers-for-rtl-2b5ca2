// One-bit full adder, the adder part of each array multiplier cell.
//
// Built from two XOR gates for the sum and two AND gates plus an OR gate for
// the carry: t = a ^ b, s = t ^ cin, cout = (a & b) | (t & cin). The XOR-based
// sum follows the text of the paper, which notes that XOR gates for the sum
// reduce the per-cell test set; the exact carry gate structure is this
// design's choice. Purely combinational.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic s,
  output logic cout
);
  logic t;
  always_comb begin
    t    = a ^ b;
    s    = t ^ cin;
    cout = (a & b) | (t & cin);
  end
endmodule
