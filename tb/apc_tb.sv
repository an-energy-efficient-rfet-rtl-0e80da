// apc_tb: drives the 25-input parallel counter (and a 15-input and a 7-input
// one) with all-zero, all-one, single-one and random patterns and compares the
// count with a population count done in the testbench.
module apc_tb;
  int checks = 0, failures = 0;
  logic [24:0] in25;  logic [4:0] c25;
  logic [14:0] in15;  logic [3:0] c15;
  logic [6:0]  in7;   logic [2:0] c7;
  apc dut (.in_bits(in25), .count(c25));
  apc #(.N(15)) dut15 (.in_bits(in15), .count(c15));
  apc #(.N(7))  dut7  (.in_bits(in7),  .count(c7));

  function automatic int ones(input logic [31:0] v);
    automatic int n = 0;
    for (int i = 0; i < 32; i++) n += int'(v[i]);
    return n;
  endfunction

  task automatic apply(input logic [24:0] v);
    in25 = v; in15 = v[14:0]; in7 = v[6:0];
    #1;
    checks += 3;
    if (int'(c25) != ones(32'(v)))        begin failures++; $display("FAIL N=25 %h -> %0d", v, c25); end
    if (int'(c15) != ones(32'(v[14:0])))  begin failures++; $display("FAIL N=15 %h -> %0d", v[14:0], c15); end
    if (int'(c7)  != ones(32'(v[6:0])))   begin failures++; $display("FAIL N=7 %h -> %0d", v[6:0], c7); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    apply('0);
    apply('1);
    for (int i = 0; i < 25; i++) apply(25'(1) << i);
    for (int i = 0; i < 3000; i++) apply(25'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
