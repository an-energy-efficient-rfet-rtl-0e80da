// sng_tb: a bank of four PCCs sharing one LFSR. Over one full LFSR period
// (255 steps) the ones of each stream must be within one of its value (the
// all-zero random number never occurs). Every bit is compared with the NAND/NOR
// chain recurrence on the random number shown on rnd, and the streams must
// not change while en is low.
module sng_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0;
  logic [3:0][7:0] vals;
  logic [3:0] bits;
  logic [7:0] rnd;
  sng #(.NUM(4), .W(8), .SEED(8'h33)) dut (.clk, .rst_n, .en, .vals, .bits, .rnd);
  always #5 clk = ~clk;

  function automatic bit pcc_ref(input int n, input int x, input int r);
    automatic bit o = 0;
    for (int i = 1; i <= n; i++) begin
      automatic bit xi = x[i-1], ri = r[i-1];
      automatic bit nd = !(o && ri), nr = !(o || ri);
      automatic bit pick_nor = ((n % 2) == 0) ? ((i % 2) ? xi : !xi) : ((i % 2) ? !xi : xi);
      o = pick_nor ? nr : nd;
    end
    return o;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int cnt [4];
    logic [3:0] b0;
    for (int n = 0; n < 4; n++) cnt[n] = 0;
    vals = {8'd200, 8'd128, 8'd37, 8'd0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (rnd != 8'h33) begin failures++; $display("FAIL seed %h", rnd); end
    b0 = bits;
    repeat (3) @(negedge clk);
    checks++;
    if (bits != b0) begin failures++; $display("FAIL streams moved while en low"); end
    en = 1;
    for (int t = 0; t < 255; t++) begin
      for (int n = 0; n < 4; n++) begin
        cnt[n] += int'(bits[n]);
        checks++;
        if (bits[n] != pcc_ref(8, int'(vals[n]), int'(rnd))) begin
          failures++; $display("FAIL t=%0d n=%0d", t, n);
        end
      end
      @(negedge clk);
    end
    for (int n = 0; n < 4; n++) begin
      checks++;
      if (cnt[n] < int'(vals[n]) - 1 || cnt[n] > int'(vals[n]) + 1) begin
        failures++; $display("FAIL stream %0d: %0d ones for value %0d", n, cnt[n], vals[n]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
