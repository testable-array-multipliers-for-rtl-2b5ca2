// End-to-end test of array_mult_bist at its default size (N = 16).
//
// Sequence: reset; normal multiplications checked against a * b; a self-test
// run that must pass, with its timing checked (busy for five clocks, one per
// vector, done six clock edges after the edge that takes bist_start) and the
// multiplier's test mode and vector index observed each cycle; normal
// multiplication again; self-test runs with a stuck-at fault forced on a cell
// net, which must fail; after releasing the fault, a run that must pass
// again. Counts how often each mechanism happened (normal multiply, switch to
// test mode and back, each of the five vectors, left-border multiplexer in
// test position, passing run, detected fault) and counts a failure for any
// that never did.
module tb_array_mult_bist;
  localparam int N = 16;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] a, b;
  logic [2*N-1:0] p;
  logic bist_start = 0, bist_busy, bist_done, bist_pass;

  int checks = 0, failures = 0;
  int n_mult = 0, n_to_test = 0, n_to_normal = 0, n_pass = 0, n_detect = 0, n_mux_test = 0;
  int n_vec [5] = '{0, 0, 0, 0, 0};

  array_mult_bist dut (.clk(clk), .rst_n(rst_n), .a(a), .b(b), .p(p),
                       .bist_start(bist_start), .bist_busy(bist_busy),
                       .bist_done(bist_done), .bist_pass(bist_pass));

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Mode switches and vectors seen inside the design.
  logic tm_q = 0;
  always @(posedge clk) begin
    if (dut.test_mode && !tm_q) n_to_test++;
    if (!dut.test_mode && tm_q) n_to_normal++;
    tm_q <= dut.test_mode;
    if (dut.test_mode) begin
      if (dut.cnt < 5) n_vec[dut.cnt]++;
      if (dut.u_mult.test_mode) n_mux_test++;
    end
  end

  task automatic multiply(int count);
    for (int k = 0; k < count; k++) begin
      @(negedge clk);
      a = N'($urandom());
      b = N'($urandom());
      if (k == 0) begin a = '1; b = '1; end
      #1;
      check(p == (2*N)'(a) * (2*N)'(b), $sformatf("%h * %h = %h", a, b, p));
      n_mult++;
    end
  endtask

  // One self-test run; returns bist_pass.
  task automatic bist_run(output bit passed);
    int edges;
    @(negedge clk) bist_start = 1;
    @(posedge clk);                       // edge that takes the start
    edges = 1;
    @(negedge clk) bist_start = 0;
    check(bist_busy && !bist_done, "busy after start");
    while (!bist_done && edges < 20) begin
      @(posedge clk);
      edges++;
      #1;
    end
    check(edges == 6, $sformatf("test time %0d clock edges, expected 6", edges));
    check(!bist_busy, "not busy when done");
    passed = bist_pass;
  endtask

  initial begin
    bit ok;
    a = '0; b = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(!bist_busy && !bist_done && !bist_pass, "idle after reset");

    multiply(200);

    bist_run(ok);
    check(ok, "fault-free self-test passes");
    if (ok) n_pass++;
    check(bist_done && bist_pass, "result holds");

    multiply(200);

    // Stuck-at faults on cell nets: sum of an inner cell, carry of a
    // left-border cell, and the sum of a right-border cell, which reaches the
    // ORA only through the test-mode multiplexer of the next row.
    force dut.u_mult.g_row[5].g_col[7].po_c = 1'b0;
    bist_run(ok);
    check(!ok, "stuck-at-0 on cell (5,7) sum detected");
    if (!ok) n_detect++;
    release dut.u_mult.g_row[5].g_col[7].po_c;

    force dut.u_mult.g_row[9].g_col[N-1].co_c = 1'b1;
    bist_run(ok);
    check(!ok, "stuck-at-1 on cell (9,15) carry detected");
    if (!ok) n_detect++;
    release dut.u_mult.g_row[9].g_col[N-1].co_c;

    force dut.u_mult.g_row[3].g_col[0].po_c = 1'b1;
    bist_run(ok);
    check(!ok, "stuck-at-1 on cell (3,0) sum detected");
    if (!ok) n_detect++;
    release dut.u_mult.g_row[3].g_col[0].po_c;

    bist_run(ok);
    check(ok, "self-test passes again after the fault is removed");
    if (ok) n_pass++;

    multiply(50);

    $display("mechanisms: multiply=%0d to_test=%0d to_normal=%0d vectors=%0d,%0d,%0d,%0d,%0d mux_test_cycles=%0d pass=%0d detect=%0d",
             n_mult, n_to_test, n_to_normal, n_vec[0], n_vec[1], n_vec[2], n_vec[3], n_vec[4],
             n_mux_test, n_pass, n_detect);
    check(n_mult > 0, "normal multiply happened");
    check(n_to_test > 0 && n_to_normal > 0, "mode switches happened");
    for (int v = 0; v < 5; v++) check(n_vec[v] == 5, $sformatf("vector %0d applied once per run", v));
    check(n_mux_test > 0, "test-mode multiplexer used");
    check(n_pass == 2, "passing runs");
    check(n_detect == 3, "detected faults");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
