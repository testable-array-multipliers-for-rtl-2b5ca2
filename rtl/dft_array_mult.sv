// N x N carry-ripple array multiplier made C-testable (design for test).
//
// Cell (r, j) multiplies operand bit x[r] by y[j] and adds the result to the
// partial product coming down its column chain and the carry coming from its
// right-hand neighbour along its row chain. Row r is shifted one place left
// of row r-1, so cell (r, j) takes its column input from cell (r-1, j+1).
// Carries ripple right to left inside a row; the carry out of the left-border
// cell of a row becomes the column input of the left-border cell of the next
// row. The right-border cell of row r yields product bit p[r], the bottom row
// yields p[2N-2:N-1] and its last carry p[2N-1].
//
// For test, two things differ from a plain array multiplier. The carry input
// of every right-border cell (ci) and the column input of every top-row cell
// (pi) are inputs of the block instead of constant zeros, and each row r >= 1
// has a 2:1 multiplexer on the column input of its left-border cell: with
// test_mode = 0 it takes the carry out of row r-1 (normal multiplication);
// with test_mode = 1 it takes the right-border sum of row r-1, an output that
// otherwise is only a product bit. Both follow the paper's Fig. 6. With that
// multiplexer every cell's three adder inputs can be set from the borders,
// and five vectors test every cell (see test_vector_decoder).
//
// Interface: in normal use, drive test_mode = 0, ci = 0 and pi = 0; then
// p = x * y. In test mode the block's test responses are co (left-border
// carries, one per row), po (bottom-row sums, one per column) and the operand
// pass-throughs xo and yo. The block is purely combinational; its critical
// path runs through about 2N cells.
module dft_array_mult #(
  parameter int unsigned N = 16
) (
  input  logic           test_mode,
  input  logic [N-1:0]   x,     // operand bit r drives row r
  input  logic [N-1:0]   y,     // operand bit j drives column j
  input  logic [N-1:0]   ci,    // row-chain carry into the right border, per row
  input  logic [N-1:0]   pi,    // column-chain input of the top row, per column
  output logic [2*N-1:0] p,     // product (normal mode)
  output logic [N-1:0]   co,    // row-chain carry out of the left border, per row
  output logic [N-1:0]   po,    // column-chain output of the bottom row, per column
  output logic [N-1:0]   xo,    // x passed through every row
  output logic [N-1:0]   yo     // y passed through every column
);

  // Each cell's nets live in its own generate scope, g_row[r].g_col[j]:
  // xi, yi, ci, pi enter the cell and xo, yo, co, po leave it. A neighbour's
  // output is named through that scope, so no net is shared by two cells.
  for (genvar r = 0; r < N; r++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      logic xi, yi, ci_c, pi_c;
      logic xo_c, yo_c, co_c, po_c;

      // x enters at the right border and moves left along the row.
      if (j == 0) begin : g_x_border
        assign xi = x[r];
      end else begin : g_x_chain
        assign xi = g_row[r].g_col[j-1].xo_c;
      end

      // Row chain: carry from the right-hand neighbour, ci at the border.
      if (j == 0) begin : g_c_border
        assign ci_c = ci[r];
      end else begin : g_c_chain
        assign ci_c = g_row[r].g_col[j-1].co_c;
      end

      // y and the column chain enter at the top and move down.
      if (r == 0) begin : g_top
        assign yi   = y[j];
        assign pi_c = pi[j];
      end else begin : g_below
        assign yi = g_row[r-1].g_col[j].yo_c;
        if (j < N - 1) begin : g_inner
          assign pi_c = g_row[r-1].g_col[j+1].po_c;
        end else begin : g_left_mux
          // Test-mode multiplexer of the left border.
          assign pi_c = test_mode ? g_row[r-1].g_col[0].po_c
                                  : g_row[r-1].g_col[N-1].co_c;
        end
      end

      mult_cell u_cell (
        .xi(xi),
        .yi(yi),
        .ci(ci_c),
        .pi(pi_c),
        .xo(xo_c),
        .yo(yo_c),
        .co(co_c),
        .po(po_c)
      );
    end
  end

  for (genvar r = 0; r < N; r++) begin : g_row_out
    assign co[r] = g_row[r].g_col[N-1].co_c;
    assign xo[r] = g_row[r].g_col[N-1].xo_c;
    if (r < N - 1) begin : g_low_bit
      assign p[r] = g_row[r].g_col[0].po_c;
    end
  end

  for (genvar j = 0; j < N; j++) begin : g_col_out
    assign po[j]    = g_row[N-1].g_col[j].po_c;
    assign p[N-1+j] = g_row[N-1].g_col[j].po_c;
    assign yo[j]    = g_row[N-1].g_col[j].yo_c;
  end
  assign p[2*N-1] = g_row[N-1].g_col[N-1].co_c;

endmodule
