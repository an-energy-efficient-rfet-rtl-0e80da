// scnn_top_tb: end-to-end test of the whole accelerator at its default size
// (8 channels, 16 MACs of 25 inputs, 8-bit values, 32-bit streams). It fills
// the activation buffer and every channel's weight buffers over the off-chip
// port, runs tiles in every mode (conv, conv+ReLU, conv+ReLU+pooling,
// FC+ReLU, sequential and pipelined, and a second-layer tile that reads the
// results written back by earlier tiles), reads all results back over the
// host port and compares them with a bit-exact model of the data path kept in
// the testbench (LFSRs from their seeds, NAND/NOR chain equations, XNOR
// products, counts, scaling, OR-based ReLU/pooling, ones counting, row layout
// of the write-back). It also checks the pipelined tile rate of K+3 cycles and
// counts how often each mechanism occurred; one that never occurred fails.
module scnn_top_tb;
  import scnn_pkg::*;
  localparam int L = 8, M = 16, N = 25, K = 32, XR = 8, AR = 64, WR = 16;
  localparam int AD = AR * N, WD = WR * N;   // bytes per bank
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic ext_we = 0, ext_bank = 0;
  logic [7:0] ext_tgt = 0;
  logic [7:0] ext_addr = 0;
  logic [XR-1:0][N-1:0][7:0] ext_data;
  logic pipe_en = 0, cmd_valid = 0, cmd_ready, tile_done, busy;
  tile_cmd_t cmd;
  logic hr_bank = 0;
  logic [7:0] hr_addr = 0;
  logic [N-1:0][7:0] hr_row;
  logic [31:0] perf_starve, perf_wait, perf_overlap, perf_tiles;
  scnn_top dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // ---------------- reference model ----------------
  logic [7:0] amem [2][AD];
  logic [7:0] wmem [L][2][WD];
  bit         aknown [2][AD];     // byte holds a value the testbench knows
  logic [7:0] lx;                 // activation LFSR
  logic [7:0] lw [L];             // weight LFSRs

  function automatic bit pcc_ref(input int x, input int r);
    bit o = 0;
    for (int i = 1; i <= 8; i++) begin
      bit xi = x[i-1], ri = r[i-1];
      bit nd = !(o && ri), nr = !(o || ri);
      bit pick_nor = (i % 2) ? xi : !xi;   // N = 8 is even
      o = pick_nor ? nr : nd;
    end
    return o;
  endfunction

  function automatic logic [7:0] lfsr_next(input logic [7:0] s);
    return {s[6:0], s[7] ^ s[5] ^ s[4] ^ s[3]};   // x^8+x^6+x^5+x^4+1
  endfunction

  // run one tile through the model; results go to amem[~a_bank]
  task automatic model_tile(input tile_cmd_t c);
    int ones [L][M];
    int nout;
    logic [7:0] act [M*N];
    for (int i = 0; i < M * N; i++) act[i] = amem[c.a_bank][(c.a_addr * N + i) % AD];
    for (int ch = 0; ch < L; ch++) for (int m = 0; m < M; m++) ones[ch][m] = 0;
    for (int t = 0; t < K; t++) begin
      bit ab [M*N];
      bit zb;
      for (int i = 0; i < M * N; i++) ab[i] = pcc_ref(int'(act[i]), int'(lx));
      zb = pcc_ref(100, int'(lx));
      for (int ch = 0; ch < L; ch++) begin
        int cnt [M];
        int tree;
        bit rl [M];
        tree = 0;
        for (int m = 0; m < M; m++) begin
          cnt[m] = 0;
          for (int i = 0; i < N; i++)
            cnt[m] += (ab[m*N+i] == pcc_ref(int'(wmem[ch][c.w_bank][(c.w_addr * N + m*N + i) % WD]), int'(lw[ch]))) ? 1 : 0;
          tree += cnt[m];
        end
        for (int m = 0; m < M; m++) begin
          automatic int v = (c.fc_mode && m == 0) ? tree : cnt[m] * 16;
          automatic bit b = pcc_ref((v * 256) / 512, int'(lx));
          rl[m] = c.relu_en ? (b | zb) : b;
        end
        for (int m = 0; m < M; m++) begin
          automatic bit y = rl[m];
          if (c.pool_en && !c.fc_mode) y = (m < M / 4) ? (rl[4*m] | rl[4*m+1] | rl[4*m+2] | rl[4*m+3]) : 1'b0;
          ones[ch][m] += int'(y);
        end
        lw[ch] = lfsr_next(lw[ch]);
      end
      lx = lfsr_next(lx);
    end
    nout = c.fc_mode ? 1 : c.pool_en ? M / 4 : M;
    // result j of channel ch is byte j*L + ch from row o_addr on; the last
    // row is padded with zeros
    for (int f = 0; f < ((nout * L + N - 1) / N) * N; f++) begin
      automatic int a = (c.o_addr * N + f) % AD;
      automatic int j = f / L, ch = f % L;
      amem[~c.a_bank][a]   = (j < nout) ? 8'((ones[ch][j] * 8 > 255) ? 255 : ones[ch][j] * 8) : 8'd0;
      aknown[~c.a_bank][a] = 1;
    end
  endtask

  // ---------------- stimulus helpers ----------------
  // one beat of XR rows starting at row addr
  task automatic ext_write(input int tgt, input bit bank, input int addr);
    ext_we = 1; ext_tgt = 8'(tgt); ext_bank = bank; ext_addr = 8'(addr);
    for (int r = 0; r < XR; r++)
      for (int i = 0; i < N; i++) begin
        automatic logic [7:0] v = 8'($urandom);
        ext_data[r][i] = v;
        if (tgt == 0) begin
          amem[bank][((addr + r) * N + i) % AD] = v;
          aknown[bank][((addr + r) * N + i) % AD] = 1;
        end else wmem[tgt-1][bank][((addr + r) * N + i) % WD] = v;
      end
    @(posedge clk); #1;
    ext_we = 0;
  endtask

  tile_cmd_t issued [$];
  task automatic issue(input tile_cmd_t c);
    cmd_valid = 1; cmd = c;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
    issued.push_back(c);
  endtask

  // mechanism counters and tile rate
  int n_relu = 0, n_norelu = 0, n_pool = 0, n_fc = 0, n_seq = 0, n_pipe = 0, n_layer2 = 0;
  int cyc = 0, last_done = -1;
  int done_iv [$];
  always @(negedge clk) if (rst_n) begin
    cyc++;
    if (tile_done) begin
      if (last_done >= 0) done_iv.push_back(cyc - last_done);
      last_done = cyc;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tile_cmd_t c;
    lx = 8'hE1;
    for (int ch = 0; ch < L; ch++) lw[ch] = 8'(8'h5A + 3 * ch);
    for (int b = 0; b < 2; b++) for (int a = 0; a < AD; a++) aknown[b][a] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // fill: activation bank 0 and bank 1 completely, weights in both banks
    for (int b = 0; b < 2; b++) for (int k = 0; k < AR / XR; k++) ext_write(0, b[0], k * XR);
    for (int ch = 0; ch < L; ch++) for (int b = 0; b < 2; b++) for (int k = 0; k < WR / XR; k++)
      ext_write(ch + 1, b[0], k * XR);

    // sequential tiles
    pipe_en = 0;
    c = '0; c.a_addr = 0;   c.w_addr = 0;  c.o_addr = 0;   c.relu_en = 1; c.pool_en = 1; issue(c);
    c = '0; c.a_addr = 16;  c.w_addr = 3;  c.o_addr = 2;                                 issue(c);
    c = '0; c.a_addr = 4;   c.w_bank = 1;  c.o_addr = 8;   c.relu_en = 1; c.fc_mode = 1; issue(c);
    n_seq += 3;
    // pipelined tiles, back to back
    pipe_en = 1;
    for (int i = 0; i < 4; i++) begin
      c = '0; c.a_addr = 8'(30 + 5 * i); c.w_bank = i[0]; c.w_addr = 8'(5 * i);
      c.o_addr = 8'(9 + 6 * i); c.relu_en = 1;
      issue(c);
      n_pipe++;
    end
    while (busy) @(posedge clk);
    #1;
    // second layer: read results written back into bank 1
    c = '0; c.a_bank = 1; c.a_addr = 0; c.w_addr = 7; c.o_addr = 40; c.relu_en = 1; c.pool_en = 1;
    issue(c);
    n_layer2++;
    while (busy) @(posedge clk);
    #1;

    // run the model in order and compare every byte the model knows
    foreach (issued[i]) begin
      if (issued[i].relu_en) n_relu++; else n_norelu++;
      if (issued[i].pool_en) n_pool++;
      if (issued[i].fc_mode) n_fc++;
      model_tile(issued[i]);
    end
    check(perf_tiles == 32'(issued.size()), $sformatf("%0d tiles reported", perf_tiles));
    for (int b = 0; b < 2; b++)
      for (int r = 0; r < AR; r++) begin
        hr_bank = b[0]; hr_addr = 8'(r);
        @(posedge clk); #1;
        for (int i = 0; i < N; i++)
          if (aknown[b][r * N + i]) begin
            checks++;
            if (hr_row[i] != amem[b][r * N + i]) begin
              failures++;
              if (failures < 20) $display("FAIL bank %0d row %0d byte %0d: %0d expected %0d", b, r, i, hr_row[i], amem[b][r * N + i]);
            end
          end
      end
    // pipelined tile rate: the intervals between the last three pipelined tiles
    check(done_iv.size() >= 6, "tile completions measured");
    if (done_iv.size() >= 6) begin
      check(done_iv[4] == K + 3, $sformatf("pipelined tile interval %0d", done_iv[4]));
      check(done_iv[5] == K + 3, $sformatf("pipelined tile interval %0d", done_iv[5]));
    end
    // every mechanism must have happened
    $display("mechanisms: relu=%0d no-relu=%0d pool=%0d fc=%0d sequential=%0d pipelined=%0d second-layer=%0d",
             n_relu, n_norelu, n_pool, n_fc, n_seq, n_pipe, n_layer2);
    $display("counters: starve=%0d wait=%0d overlap=%0d", perf_starve, perf_wait, perf_overlap);
    check(n_relu > 0 && n_norelu > 0 && n_pool > 0 && n_fc > 0, "every datapath mode used");
    check(n_seq > 0 && n_pipe > 0 && n_layer2 > 0, "every flow used");
    check(perf_starve > 0, "compute waited for a load");
    check(perf_wait > 0, "a loaded tile waited for the compute engine");
    check(perf_overlap > 0, "load overlapped a bitstream");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
