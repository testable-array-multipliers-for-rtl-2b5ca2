// Self-checking test of bist_counter.
//
// After reset the counter is idle. A start pulse must give busy for exactly
// five clocks with cnt = 0, 1, 2, 3, 4 in turn, then done, which holds until
// the next start; a start while busy is ignored. Three runs are made, with a
// start held high across a run in the last one.
module tb_bist_counter;
  logic clk = 0, rst_n = 0, start = 0;
  logic [2:0] cnt;
  logic busy, done;
  int checks = 0, failures = 0;

  bist_counter dut (.clk(clk), .rst_n(rst_n), .start(start),
                    .cnt(cnt), .busy(busy), .done(done));

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(bit hold_start);
    @(negedge clk) start = 1;
    @(negedge clk) begin
      if (!hold_start) start = 0;
    end
    for (int v = 0; v < 5; v++) begin
      check(busy && !done && cnt == 3'(v), $sformatf("vector %0d: busy=%b done=%b cnt=%0d", v, busy, done, cnt));
      @(negedge clk);
    end
    check(!busy && done, "done after five vectors");
    start = 0;
    repeat (3) begin
      @(negedge clk);
      check(!busy && done, "done holds");
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    check(!busy && !done && cnt == 0, "idle after reset");
    rst_n = 1;
    repeat (2) @(negedge clk);
    check(!busy && !done, "idle without start");
    run(0);
    run(0);
    // Start held across the whole run: runs once, then restarts only
    // because start is still high after done.
    @(negedge clk) start = 1;
    @(negedge clk);
    check(busy && cnt == 0, "busy with start held");
    @(negedge clk);
    check(busy && cnt == 1, "start while busy ignored");
    start = 0;
    repeat (4) @(negedge clk);
    check(!busy && done, "done with start held");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
