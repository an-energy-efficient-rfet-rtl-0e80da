// shift_reg_tb: shifts in 16 random rows, copies them to the hold register and
// checks that row r of vals is the r-th row loaded. It then shifts 16 new rows
// without hold (vals must not change) and holds again (vals must be the new rows).
module shift_reg_tb;
  int checks = 0, failures = 0;
  logic clk = 0, shift = 0, hold = 0;
  logic [24:0][7:0] row_in;
  logic [15:0][24:0][7:0] vals;
  shift_reg dut (.clk, .shift, .row_in, .hold, .vals);
  always #5 clk = ~clk;
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    logic [15:0][24:0][7:0] a, b;
    for (int r = 0; r < 16; r++) for (int i = 0; i < 25; i++) begin
      a[r][i] = 8'($urandom); b[r][i] = 8'($urandom);
    end
    @(negedge clk);
    for (int r = 0; r < 16; r++) begin shift = 1; row_in = a[r]; @(negedge clk); end
    shift = 0; hold = 1; @(negedge clk); hold = 0;
    for (int r = 0; r < 16; r++) begin
      checks++;
      if (vals[r] != a[r]) begin failures++; $display("FAIL row %0d after first load", r); end
    end
    for (int r = 0; r < 16; r++) begin shift = 1; row_in = b[r]; @(negedge clk); end
    shift = 0;
    checks++;
    if (vals != a) begin failures++; $display("FAIL hold register changed during shifting"); end
    hold = 1; @(negedge clk); hold = 0;
    for (int r = 0; r < 16; r++) begin
      checks++;
      if (vals[r] != b[r]) begin failures++; $display("FAIL row %0d after second load", r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
