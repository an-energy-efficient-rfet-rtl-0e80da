// adder_tree_tb: random MAC counts (0..25); in FC mode the output must be the
// sum of all 16, including the largest sum 400; with fc_mode low it must be 0.
module adder_tree_tb;
  int checks = 0, failures = 0;
  logic fc_mode;
  logic [15:0][4:0] counts;
  logic [8:0] sum;
  adder_tree dut (.fc_mode, .counts, .sum);
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < 1000; i++) begin
      automatic int e = 0;
      for (int m = 0; m < 16; m++) begin
        counts[m] = (i == 0) ? 5'd25 : 5'($urandom_range(0, 25));
        e += int'(counts[m]);
      end
      fc_mode = 1; #1;
      checks++;
      if (int'(sum) != e) begin failures++; $display("FAIL sum=%0d exp=%0d", sum, e); end
      fc_mode = 0; #1;
      checks++;
      if (sum != 0) begin failures++; $display("FAIL bypass sum=%0d", sum); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
