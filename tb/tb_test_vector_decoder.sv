// Self-checking test of test_vector_decoder.
//
// For indexes 0..4 the stimulus fields are compared with Table II of the
// paper, and the response fields with what the reference array model
// computes when the stimulus is expanded over 4-, 8- and 16-bit arrays in
// test mode, so the responses are checked independently of the table.
// Indexes 5..7 must give all zeros.
module tb_test_vector_decoder;
  import mult_bist_pkg::*;
  import mult_ref_pkg::*;

  logic [2:0]   idx;
  test_vector_t tv;
  int checks = 0, failures = 0;

  test_vector_decoder dut (.idx(idx), .tv(tv));

  function automatic logic [MAXN-1:0] mask(int n);
    return (MAXN'(1) << n) - 1;
  endfunction

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      idx = 3'(v);
      #1;
      if (v >= 5) begin
        checks++;
        if (tv != '0) begin failures++; $display("FAIL unused index %0d", v); end
      end else begin
        checks++;
        if ({tv.x, tv.y, tv.ci, tv.pi} != TABLE2[v][11:4]) begin
          failures++;
          $display("FAIL vector %0d stimulus %b", v, {tv.x, tv.y, tv.ci, tv.pi});
        end
        for (int n = 4; n <= 16; n = n * 2) begin
          ref_out_t e;
          e = ref_array(n, 1, rep2(tv.x), rep2(tv.y), rep2(tv.ci), rep2(tv.pi));
          checks++;
          if (((e.co ^ rep2(tv.co)) & mask(n)) != '0 || ((e.po ^ rep2(tv.po)) & mask(n)) != '0) begin
            failures++;
            $display("FAIL vector %0d response for n=%0d", v, n);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
