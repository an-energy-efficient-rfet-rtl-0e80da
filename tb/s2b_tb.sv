// s2b_tb: streams of 32 random bits with random gaps (en low); after each
// stream the value must be min(ones*8, 255). A new clr must restart the count.
module s2b_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0, en = 0, bit_i = 0;
  logic [7:0] value;
  s2b dut (.clk, .rst_n, .clr, .en, .bit_i, .value);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 100; s++) begin
      automatic int ones = 0, e;
      automatic int dens = (s == 0) ? 100 : (s == 1) ? 0 : $urandom_range(0, 100);
      for (int t = 0; t < 32; t++) begin
        if ($urandom_range(0, 3) == 0) begin   // idle cycle inside the stream
          en = 0; clr = 0; bit_i = 1; @(negedge clk);
        end
        en = 1; clr = (t == 0);
        bit_i = ($urandom_range(0, 99) < dens);
        ones += int'(bit_i);
        @(negedge clk);
      end
      en = 0; clr = 0; bit_i = 1;
      @(negedge clk);
      e = (ones * 8 > 255) ? 255 : ones * 8;
      checks++;
      if (int'(value) != e) begin failures++; $display("FAIL ones=%0d value=%0d exp=%0d", ones, value, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
