// lfsr_rns_tb: checks that the 8-bit LFSR starts at its seed, holds its state
// while en is low, visits every non-zero state exactly once in 255 steps and
// returns to the seed (maximum length), and follows x^8+x^6+x^5+x^4+1 step by
// step. A 4-bit instance is checked for period 15.
module lfsr_rns_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0;
  logic [7:0] rnd;
  logic [3:0] rnd4;
  lfsr_rns #(.W(8), .SEED(8'h01)) dut (.clk, .rst_n, .en, .rnd);
  lfsr_rns #(.W(4), .SEED(4'h9))  dut4 (.clk, .rst_n, .en, .rnd(rnd4));
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    bit seen [256];
    logic [7:0] exp;
    int p4;
    for (int i = 0; i < 256; i++) seen[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(rnd == 8'h01, "seed after reset");
    repeat (3) @(negedge clk);
    check(rnd == 8'h01, "state held while en low");
    en = 1;
    exp = 8'h01;
    for (int i = 0; i < 255; i++) begin
      check(!seen[rnd] && rnd != 0, $sformatf("state %h repeated or zero at step %0d", rnd, i));
      seen[rnd] = 1;
      check(rnd == exp, $sformatf("step %0d: %h expected %h", i, rnd, exp));
      exp = {exp[6:0], exp[7] ^ exp[5] ^ exp[4] ^ exp[3]};
      @(negedge clk);
    end
    check(rnd == 8'h01, "period 255");
    // 4-bit instance: count steps until it returns to its seed
    en = 0; rst_n = 0; @(negedge clk); rst_n = 1; en = 1;
    p4 = 0;
    do begin @(negedge clk); p4++; end while (rnd4 != 4'h9 && p4 < 40);
    check(p4 == 15, $sformatf("4-bit period %0d", p4));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
