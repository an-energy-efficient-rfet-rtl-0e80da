// rfet_pcc_tb: for an 8-bit chain (even N) every input X is applied with all
// 256 random numbers; the number of ones must be exactly X (probability
// X/256). For N = 3 (odd) the count over all 8 random numbers must be X + 1,
// the constant term of the odd-length chain. Each output bit is also compared
// with the stage-by-stage NAND/NOR recurrence written from the chain equations.
module rfet_pcc_tb;
  int checks = 0, failures = 0;
  logic [7:0] x8, r8;  logic o8;
  logic [2:0] x3, r3;  logic o3;
  rfet_pcc dut (.x(x8), .r(r8), .o(o8));
  rfet_pcc #(.N(3)) dut3 (.x(x3), .r(r3), .o(o3));

  // O_i = NAND(O_i-1,R_i) or NOR(O_i-1,R_i) selected by X_i as in the chain
  // equations: for even N odd stages pick NOR when X_i=1, even stages NAND
  // when X_i=1; for odd N the other way round.
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
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int cnt, bad;
    for (int x = 0; x < 256; x++) begin
      cnt = 0; bad = 0;
      x8 = 8'(x);
      for (int r = 0; r < 256; r++) begin
        r8 = 8'(r);
        #1;
        cnt += int'(o8);
        if (o8 != pcc_ref(8, x, r)) bad++;
      end
      checks += 2;
      if (cnt != x) begin failures++; $display("FAIL N=8 X=%0d ones=%0d", x, cnt); end
      if (bad != 0) begin failures++; $display("FAIL N=8 X=%0d %0d bits differ from recurrence", x, bad); end
    end
    for (int x = 0; x < 8; x++) begin
      cnt = 0; bad = 0;
      x3 = 3'(x);
      for (int r = 0; r < 8; r++) begin
        r3 = 3'(r);
        #1;
        cnt += int'(o3);
        if (o3 != pcc_ref(3, x, r)) bad++;
      end
      checks += 2;
      if (cnt != x + 1) begin failures++; $display("FAIL N=3 X=%0d ones=%0d", x, cnt); end
      if (bad != 0) begin failures++; $display("FAIL N=3 X=%0d %0d bits differ", x, bad); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
