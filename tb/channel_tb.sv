// channel_tb: end-to-end check of one channel at its default size (16 MACs of
// 25 inputs, 32-bit streams). Random weights are shifted in and held; random
// activation streams and activation random numbers are driven for 32 cycles.
// A bit-exact model in the testbench (LFSR x^8+x^6+x^5+x^4+1 from the
// channel's seed, NAND/NOR chain equations, XNOR products, counts, adder
// tree, scaling to the PCC, OR-based ReLU and pooling, ones counting) gives
// the expected results, checked when res_valid pulses, which must be exactly
// K+1 cycles after the first bit. Five tiles cover conv, conv+ReLU,
// conv+ReLU+pooling, FC+ReLU and FC.
module channel_tb;
  localparam int M = 16, N = 25, K = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic w_shift = 0, hold = 0, bit_valid = 0, bit_first = 0, bit_last = 0;
  logic fc_mode = 0, relu_en = 0, pool_en = 0;
  logic [N-1:0][7:0] w_row;
  logic [M-1:0][N-1:0] a_bits;
  logic [7:0] rnd_x;
  logic [M-1:0][7:0] results;
  logic res_valid;
  channel dut (.*);
  always #5 clk = ~clk;

  function automatic bit pcc_ref(input int x, input int r);
    automatic bit o = 0;
    for (int i = 1; i <= 8; i++) begin
      automatic bit xi = x[i-1], ri = r[i-1];
      automatic bit nd = !(o && ri), nr = !(o || ri);
      automatic bit pick_nor = (i % 2) ? xi : !xi;
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
    logic [7:0] lw;          // model of the weight LFSR
    logic [M-1:0][N-1:0][7:0] w;
    int ones [M];
    automatic int modes [5][3] = '{'{0,0,0}, '{0,1,0}, '{0,1,1}, '{1,1,0}, '{1,0,0}};
    lw = 8'h5A;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int tile = 0; tile < 5; tile++) begin
      int tv;
      for (int m = 0; m < M; m++) for (int i = 0; i < N; i++)
        w[m][i] = (tile == 0 && m == 0) ? 8'(10 * i) : 8'($urandom);
      for (int m = 0; m < M; m++) begin w_shift = 1; w_row = w[m]; @(negedge clk); end
      w_shift = 0; hold = 1; @(negedge clk); hold = 0;
      fc_mode = modes[tile][0][0]; relu_en = modes[tile][1][0]; pool_en = modes[tile][2][0];
      for (int m = 0; m < M; m++) ones[m] = 0;
      for (int t = 0; t < K; t++) begin
        int cnt [M];
        automatic int tree = 0;
        bit ob [M], rl [M];
        bit zb;
        bit_valid = 1; bit_first = (t == 0); bit_last = (t == K - 1);
        for (int m = 0; m < M; m++) a_bits[m] = N'($urandom);
        rnd_x = 8'($urandom);
        for (int m = 0; m < M; m++) begin
          cnt[m] = 0;
          for (int i = 0; i < N; i++)
            cnt[m] += (a_bits[m][i] == pcc_ref(int'(w[m][i]), int'(lw))) ? 1 : 0;
          tree += cnt[m];
        end
        zb = pcc_ref(100, int'(rnd_x));
        for (int m = 0; m < M; m++) begin
          automatic int v = (fc_mode && m == 0) ? tree : cnt[m] * 16;
          ob[m] = pcc_ref((v * 256) / 512, int'(rnd_x));
          rl[m] = relu_en ? (ob[m] | zb) : ob[m];
        end
        for (int m = 0; m < M; m++) begin
          automatic bit y = rl[m];
          if (pool_en && !fc_mode) y = (m < M / 4) ? (rl[4*m] | rl[4*m+1] | rl[4*m+2] | rl[4*m+3]) : 1'b0;
          ones[m] += int'(y);
        end
        lw = {lw[6:0], lw[7] ^ lw[5] ^ lw[4] ^ lw[3]};
        @(negedge clk);
      end
      bit_valid = 0; bit_first = 0; bit_last = 0;
      // res_valid must come K+1 cycles after the first bit
      tv = K;
      while (!res_valid && tv < K + 10) begin @(negedge clk); tv++; end
      checks++;
      if (tv != K + 1) begin failures++; $display("FAIL tile %0d: res_valid after %0d cycles", tile, tv); end
      for (int m = 0; m < M; m++) begin
        automatic int e = (ones[m] * 8 > 255) ? 255 : ones[m] * 8;
        if (fc_mode && m > 0) continue;
        checks++;
        if (int'(results[m]) != e) begin
          failures++; $display("FAIL tile %0d lane %0d: %0d expected %0d", tile, m, results[m], e);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
