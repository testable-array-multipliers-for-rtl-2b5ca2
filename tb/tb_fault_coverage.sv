// Fault simulation of the five-vector self-test on arrays of 4, 8, 16 and 32
// bits (the paper's experiment, at several sizes to show that five vectors
// suffice whatever N is).
//
// Each size runs one fault_campaign: every single stuck-at fault on a gate
// pin or pass-on wire of every cell is injected in turn into a gate-level
// model of the array, the five vectors from the RTL TPG are applied and the
// RTL ORA compares. One check per fault and per fault-free sanity check;
// every undetected fault is a failure.
module tb_fault_coverage;
  bit d4, d8, d16, d32;
  int det4, det8, det16, det32;
  int und4, und8, und16, und32;
  int err4, err8, err16, err32;
  int checks = 0, failures = 0;

  fault_campaign #(.N(4))  c4  (.done(d4),  .detected(det4),  .undetected(und4),  .errors(err4));
  fault_campaign #(.N(8))  c8  (.done(d8),  .detected(det8),  .undetected(und8),  .errors(err8));
  fault_campaign #(.N(16)) c16 (.done(d16), .detected(det16), .undetected(und16), .errors(err16));
  fault_campaign #(.N(32)) c32 (.done(d32), .detected(det32), .undetected(und32), .errors(err32));

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (d4 && d8 && d16 && d32);
    checks   = det4 + und4 + det8 + und8 + det16 + und16 + det32 + und32 + 4 * 10;
    failures = und4 + und8 + und16 + und32 + err4 + err8 + err16 + err32;
    checks++;
    if (det4 + und4 != 4 * 4 * 40 || det32 + und32 != 32 * 32 * 40) begin
      failures++;
      $display("FAIL fault counts");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
