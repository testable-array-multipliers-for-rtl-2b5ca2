// Self-checking test of ora at N = 16.
//
// mismatch must be high exactly when any of the four compared buses differs
// from its golden value; fail must be set by a sampled mismatch, ignore an
// unsampled one, stay set, and be reset by clear.
module tb_ora;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, clear = 0, sample = 0;
  logic [N-1:0] co, po, xo, yo, gco, gpo, gxo, gyo;
  logic mismatch, fail;
  int checks = 0, failures = 0;

  ora dut (.clk(clk), .rst_n(rst_n), .clear(clear), .sample(sample),
           .co(co), .po(po), .xo(xo), .yo(yo),
           .gold_co(gco), .gold_po(gpo), .gold_xo(gxo), .gold_yo(gyo),
           .mismatch(mismatch), .fail(fail));

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // Random golden values, and outputs equal to them except for one flipped
  // bit of bus `bus` (0..3), or none for bus = 4.
  task automatic drive(int bus);
    logic [N-1:0] flip;
    gco = N'($urandom()); gpo = N'($urandom()); gxo = N'($urandom()); gyo = N'($urandom());
    flip = N'(1) << ($urandom() % N);
    co = gco ^ (bus == 0 ? flip : '0);
    po = gpo ^ (bus == 1 ? flip : '0);
    xo = gxo ^ (bus == 2 ? flip : '0);
    yo = gyo ^ (bus == 3 ? flip : '0);
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    drive(4);
    @(negedge clk);
    check(!fail, "fail low in reset");
    rst_n = 1;
    // Combinational compare.
    for (int k = 0; k < 200; k++) begin
      int bus = int'($urandom() % 5);
      drive(bus);
      #1;
      check(mismatch == (bus != 4), $sformatf("mismatch for bus %0d", bus));
    end
    // Unsampled mismatches leave fail low.
    @(negedge clk) begin drive(1); sample = 0; end
    @(negedge clk) check(!fail, "unsampled mismatch ignored");
    // Sampled matches keep it low, a sampled mismatch sets it.
    sample = 1;
    repeat (5) begin
      drive(4);
      @(negedge clk) check(!fail, "sampled match keeps fail low");
    end
    drive(2);
    @(negedge clk) check(fail, "sampled mismatch sets fail");
    drive(4);
    repeat (3) @(negedge clk) check(fail, "fail is sticky");
    sample = 0;
    clear = 1;
    @(negedge clk) check(!fail, "clear resets fail");
    clear = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
