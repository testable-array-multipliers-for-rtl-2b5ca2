// One fault-simulation campaign on an N x N array, used by
// tb_fault_coverage.
//
// Stimuli and golden outputs come from the RTL tpg, the comparison from the
// RTL ora, the faulty multiplier is fault_array_model. It first checks that
// the fault-free model gives no mismatch on any of the five vectors and
// agrees with the RTL dft_array_mult, then injects every single stuck-at
// fault (20 sites x 2 values per cell) in turn and applies the five vectors;
// a fault is detected if the ORA reports a mismatch on any of them. One
// vector is applied per time unit. done rises at the end of the campaign.
module fault_campaign #(
  parameter int N = 16
) (
  output bit done,
  output int detected,
  output int undetected,
  output int errors
);
  localparam int NUM_SITES = 20;

  logic [2:0] idx = '0;
  logic [N-1:0] x, y, ci, pi, gco, gpo, gxo, gyo;
  logic [N-1:0] co, po, xo, yo;
  logic [N-1:0] rco, rpo, rxo, ryo;
  logic [2*N-1:0] rp;
  logic mismatch, fail;
  logic fault_on = 0, fault_val = 0;
  int fault_row = 0, fault_col = 0, fault_site = 0;

  tpg #(.N(N)) u_tpg (.idx(idx), .x(x), .y(y), .ci(ci), .pi(pi),
                      .gold_co(gco), .gold_po(gpo), .gold_xo(gxo), .gold_yo(gyo));

  fault_array_model #(.N(N)) u_model (
    .test_mode(1'b1), .x(x), .y(y), .ci(ci), .pi(pi),
    .fault_on(fault_on), .fault_row(fault_row), .fault_col(fault_col),
    .fault_site(fault_site), .fault_val(fault_val),
    .co(co), .po(po), .xo(xo), .yo(yo));

  dft_array_mult #(.N(N)) u_rtl (
    .test_mode(1'b1), .x(x), .y(y), .ci(ci), .pi(pi),
    .p(rp), .co(rco), .po(rpo), .xo(rxo), .yo(ryo));

  ora #(.N(N)) u_ora (.clk(1'b0), .rst_n(1'b1), .clear(1'b0), .sample(1'b0),
                      .co(co), .po(po), .xo(xo), .yo(yo),
                      .gold_co(gco), .gold_po(gpo), .gold_xo(gxo), .gold_yo(gyo),
                      .mismatch(mismatch), .fail(fail));

  initial begin
    done = 0; detected = 0; undetected = 0; errors = 0;
    for (int v = 0; v < 5; v++) begin
      idx = 3'(v);
      #1;
      if (mismatch) begin
        errors++;
        $display("FAIL N=%0d: fault-free model mismatches on vector %0d", N, v);
      end
      if (co != rco || po != rpo || xo != rxo || yo != ryo) begin
        errors++;
        $display("FAIL N=%0d: model and RTL disagree on vector %0d", N, v);
      end
    end
    fault_on = 1;
    for (int r = 0; r < N; r++)
      for (int j = 0; j < N; j++)
        for (int s = 0; s < NUM_SITES; s++)
          for (int fv = 0; fv < 2; fv++) begin
            bit hit;
            fault_row = r; fault_col = j; fault_site = s; fault_val = fv[0];
            hit = 0;
            for (int v = 0; v < 5; v++) begin
              idx = 3'(v);
              #1;
              if (mismatch) hit = 1;
            end
            if (hit) detected++;
            else begin
              undetected++;
              if (undetected <= 10)
                $display("FAIL N=%0d: undetected cell (%0d,%0d) site %0d stuck-at-%0d", N, r, j, s, fv);
            end
          end
    $display("N=%0d: %0d of %0d single stuck-at faults detected", N, detected, detected + undetected);
    done = 1;
  end
endmodule
