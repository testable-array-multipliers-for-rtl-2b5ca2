// Exhaustive self-checking test of full_adder: all eight input combinations,
// sum and carry compared with the arithmetic a + b + cin.
module tb_full_adder;
  logic a, b, cin, s, cout;
  int checks = 0, failures = 0;

  full_adder dut (.a(a), .b(b), .cin(cin), .s(s), .cout(cout));

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, cin} = 3'(v);
      #1;
      checks++;
      if ({cout, s} != 2'(a) + 2'(b) + 2'(cin)) begin
        failures++;
        $display("FAIL a=%b b=%b cin=%b -> cout=%b s=%b", a, b, cin, cout, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
