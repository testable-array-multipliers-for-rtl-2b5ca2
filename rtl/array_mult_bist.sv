// N x N array multiplier with design-for-test and built-in self-test.
//
// The multiplier is the C-testable array of dft_array_mult. In normal mode it
// multiplies the operands a and b (its border inputs ci and pi are held at
// zero and its test multiplexers pass the left-border carries). A pulse on
// bist_start runs the self-test: the 3-bit counter (bist_counter) steps through
// the five test vectors, the TPG (tpg) decodes and expands each one over the
// whole array, the multiplier is switched to test mode, and the ORA (ora)
// compares its 4*N test outputs with the golden values at every clock. The
// test takes six clocks, from the edge that samples bist_start to the edge
// that raises bist_done, whatever N is; bist_pass is then high if every output
// matched. The self-test covers the single stuck-at faults of the cells.
//
// Following the paper: the array, its test multiplexers, the five vectors and
// their responses, and the counter/decoder/expander/ORA organisation. This
// design's own choices: the input multiplexers that select operands or test
// stimuli, the start/busy/done handshake and the sticky pass/fail result.
// During a run (bist_busy = 1) p does not hold a product.
module array_mult_bist
  import mult_bist_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-1:0] p,
  input  logic           bist_start,
  output logic           bist_busy,
  output logic           bist_done,
  output logic           bist_pass
);
  logic [CNT_W-1:0] cnt;
  logic             test_mode;

  logic [N-1:0] t_x, t_y, t_ci, t_pi;
  logic [N-1:0] g_co, g_po, g_xo, g_yo;
  logic [N-1:0] m_x, m_y, m_ci, m_pi;
  logic [N-1:0] m_co, m_po, m_xo, m_yo;
  logic         fail;

  bist_counter u_cnt (
    .clk  (clk),
    .rst_n(rst_n),
    .start(bist_start),
    .cnt  (cnt),
    .busy (bist_busy),
    .done (bist_done)
  );

  tpg #(.N(N)) u_tpg (
    .idx    (cnt),
    .x      (t_x),
    .y      (t_y),
    .ci     (t_ci),
    .pi     (t_pi),
    .gold_co(g_co),
    .gold_po(g_po),
    .gold_xo(g_xo),
    .gold_yo(g_yo)
  );

  // Operands in normal mode, test stimuli during a self-test run.
  assign test_mode = bist_busy;
  assign m_x  = test_mode ? t_x  : a;
  assign m_y  = test_mode ? t_y  : b;
  assign m_ci = test_mode ? t_ci : '0;
  assign m_pi = test_mode ? t_pi : '0;

  dft_array_mult #(.N(N)) u_mult (
    .test_mode(test_mode),
    .x        (m_x),
    .y        (m_y),
    .ci       (m_ci),
    .pi       (m_pi),
    .p        (p),
    .co       (m_co),
    .po       (m_po),
    .xo       (m_xo),
    .yo       (m_yo)
  );

  ora #(.N(N)) u_ora (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (bist_start && !bist_busy),
    .sample  (bist_busy),
    .co      (m_co),
    .po      (m_po),
    .xo      (m_xo),
    .yo      (m_yo),
    .gold_co (g_co),
    .gold_po (g_po),
    .gold_xo (g_xo),
    .gold_yo (g_yo),
    .mismatch(),
    .fail    (fail)
  );

  assign bist_pass = bist_done && !fail;
endmodule
