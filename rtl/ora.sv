// Output response analyzer (ORA) of the BIST.
//
// Compares the multiplier's 4*N test outputs (left-border carries co,
// bottom-row sums po and the pass-through operands xo, yo) with the golden
// values from the TPG. mismatch is the combinational result for the vector
// applied now; at each rising edge with sample = 1 a mismatch sets the sticky
// fail flag, which clear (given with the start of a run) resets. A run passes
// if fail is still low when the run is done. The paper says only that outputs
// are compared with golden results; the sticky flag is this design's choice.
// Active-low asynchronous reset.
module ora #(
  parameter int unsigned N = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         sample,
  input  logic [N-1:0] co,
  input  logic [N-1:0] po,
  input  logic [N-1:0] xo,
  input  logic [N-1:0] yo,
  input  logic [N-1:0] gold_co,
  input  logic [N-1:0] gold_po,
  input  logic [N-1:0] gold_xo,
  input  logic [N-1:0] gold_yo,
  output logic         mismatch,
  output logic         fail
);
  assign mismatch = (co != gold_co) || (po != gold_po) ||
                    (xo != gold_xo) || (yo != gold_yo);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  fail <= 1'b0;
    else if (clear)              fail <= 1'b0;
    else if (sample && mismatch) fail <= 1'b1;
  end
endmodule
