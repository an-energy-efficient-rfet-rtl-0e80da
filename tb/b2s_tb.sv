// b2s_tb: for sums 0..400 (9-bit) every random number 0..255 is applied; the
// ones of the converted stream must equal sum*256/512 and the zero stream
// must have exactly 100 ones (400/2 on the same scale).
module b2s_tb;
  int checks = 0, failures = 0;
  logic [8:0] sum;
  logic [7:0] rnd;
  logic bit_o, zero_bit;
  b2s dut (.sum, .rnd, .bit_o, .zero_bit);
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int s = 0; s <= 400; s += 3) begin
      automatic int c = 0, z = 0;
      sum = 9'(s);
      for (int r = 0; r < 256; r++) begin
        rnd = 8'(r); #1;
        c += int'(bit_o); z += int'(zero_bit);
      end
      checks += 2;
      if (c != (s * 256) / 512) begin failures++; $display("FAIL sum=%0d ones=%0d", s, c); end
      if (z != 100) begin failures++; $display("FAIL zero ones=%0d", z); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
