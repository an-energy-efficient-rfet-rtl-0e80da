// mac_tb: random activation and weight bit vectors; the count must equal the
// number of positions where the two bits agree (XNOR, bipolar product).
module mac_tb;
  int checks = 0, failures = 0;
  logic [24:0] a, w;
  logic [4:0] count;
  mac dut (.a_bits(a), .w_bits(w), .count);
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < 2000; i++) begin
      automatic int e = 0;
      a = 25'($urandom); w = (i == 0) ? a : (i == 1) ? ~a : 25'($urandom);
      #1;
      for (int k = 0; k < 25; k++) e += (a[k] == w[k]) ? 1 : 0;
      checks++;
      if (int'(count) != e) begin failures++; $display("FAIL a=%h w=%h count=%0d exp=%0d", a, w, count, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
