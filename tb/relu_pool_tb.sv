// relu_pool_tb: random sum and zero streams in all four enable settings,
// compared with ReLU = sum OR zero and pooling = OR over lanes 4j..4j+3.
module relu_pool_tb;
  int checks = 0, failures = 0;
  logic relu_en, pool_en;
  logic [15:0] s, z, o;
  relu_pool dut (.relu_en, .pool_en, .sum_bits(s), .zero_bits(z), .out_bits(o));
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < 2000; i++) begin
      logic [15:0] r, e;
      s = 16'($urandom); z = 16'($urandom);
      relu_en = i[0]; pool_en = i[1];
      #1;
      r = relu_en ? (s | z) : s;
      e = r;
      if (pool_en) begin
        e = '0;
        for (int j = 0; j < 4; j++) e[j] = r[4*j] | r[4*j+1] | r[4*j+2] | r[4*j+3];
      end
      checks++;
      if (o != e) begin failures++; $display("FAIL relu=%0d pool=%0d s=%h z=%h o=%h e=%h", relu_en, pool_en, s, z, o, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
