// rfet_full_adder_tb: applies all eight input combinations to the full adder
// and compares {cout, sum} with the arithmetic sum a + b + cin.
module rfet_full_adder_tb;
  int checks = 0, failures = 0;
  logic a, b, cin, sum, cout;
  rfet_full_adder dut (.a, .b, .cin, .sum, .cout);
  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, cin} = 3'(v);
      #1;
      checks++;
      if ({cout, sum} != 2'(int'(a) + int'(b) + int'(cin))) begin
        failures++;
        $display("FAIL a=%0d b=%0d cin=%0d -> cout=%0d sum=%0d", a, b, cin, cout, sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
