// Test pattern generator (TPG) of the BIST: test vector decoder + expander.
//
// The counter value idx is decoded into the 12-bit pair pattern (see
// test_vector_decoder), and the expander repeats each 2-bit field over the N
// rows or columns of the multiplier: bit i of an expanded field is field[i %
// 2]. The results are the stimuli x, y, ci, pi for the multiplier and the
// golden outputs the ORA compares with: co, po from the decoder's response
// bits, and xo, yo, which in a fault-free array equal the x and y applied.
// The two-cell patterns need N to be even, as the paper assumes.
// Combinational.
module tpg
  import mult_bist_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic [CNT_W-1:0] idx,
  output logic [N-1:0]     x,
  output logic [N-1:0]     y,
  output logic [N-1:0]     ci,
  output logic [N-1:0]     pi,
  output logic [N-1:0]     gold_co,
  output logic [N-1:0]     gold_po,
  output logic [N-1:0]     gold_xo,
  output logic [N-1:0]     gold_yo
);
  if (N % 2 != 0 || N < 2) begin : g_bad_n
    $error("tpg: N must be even and at least 2");
  end

  test_vector_t tv;

  test_vector_decoder u_dec (
    .idx(idx),
    .tv (tv)
  );

  // Expander.
  always_comb begin
    for (int i = 0; i < N; i++) begin
      x[i]       = tv.x[i % 2];
      y[i]       = tv.y[i % 2];
      ci[i]      = tv.ci[i % 2];
      pi[i]      = tv.pi[i % 2];
      gold_co[i] = tv.co[i % 2];
      gold_po[i] = tv.po[i % 2];
    end
  end
  assign gold_xo = x;
  assign gold_yo = y;
endmodule
