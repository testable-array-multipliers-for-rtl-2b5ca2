// Exhaustive self-checking test of mult_cell: all 16 combinations of
// (xi, yi, ci, pi). Checks co/po against (xi & yi) + ci + pi, the
// pass-through of xi and yi, and that the cell reproduces the propagation
// table of the multiplier cell (pattern number = {xy, cin, pin}).
module tb_mult_cell;
  logic xi, yi, ci, pi, xo, yo, co, po;
  int checks = 0, failures = 0;

  // Propagation table {cout, pout} indexed by {xy, cin, pin}, rows 0..7.
  localparam logic [1:0] PROP [8] = '{2'b00, 2'b01, 2'b01, 2'b10,
                                      2'b01, 2'b10, 2'b10, 2'b11};

  mult_cell dut (.xi(xi), .yi(yi), .ci(ci), .pi(pi),
                 .xo(xo), .yo(yo), .co(co), .po(po));

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      {xi, yi, ci, pi} = 4'(v);
      #1;
      checks++;
      if ({co, po} != 2'(xi & yi) + 2'(ci) + 2'(pi)) begin
        failures++;
        $display("FAIL sum xi=%b yi=%b ci=%b pi=%b -> co=%b po=%b", xi, yi, ci, pi, co, po);
      end
      checks++;
      if ({co, po} != PROP[{xi & yi, ci, pi}]) begin
        failures++;
        $display("FAIL table row %0d", {xi & yi, ci, pi});
      end
      checks++;
      if (xo != xi || yo != yi) begin
        failures++;
        $display("FAIL pass-through");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
