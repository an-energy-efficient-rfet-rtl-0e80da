// controller_tb: drives the tile sequencer with a model of the channels
// (res_valid two cycles after bit_last) and of the output buffer (busy for
// nout cycles after cap, done on the last). It checks every cycle that the
// shift-register loads read M rows at base + r, that sr_shift follows rd_en
// by one cycle, that hold comes after the last shift and is followed by exactly
// K bitstream cycles with first/last flags, and that cap, nout, o_addr and
// o_bank match the tile. Three tiles run without pipelining, where the
// interval between accepted commands must be M+K+5+nout cycles, then five
// tiles with pipelining, where the interval between holds must be K+3 and
// load/compute overlap must be counted.
module controller_tb;
  import scnn_pkg::*;
  localparam int M = 16, N = 25, K = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, pipe_en = 0, cmd_valid = 0, cmd_ready;
  tile_cmd_t cmd;
  logic rd_en, a_rd_bank, w_rd_bank, sr_shift, hold;
  logic [5:0] a_rd_addr, o_addr;
  logic [3:0] w_rd_addr;
  logic bit_valid, bit_first, bit_last, fc_mode, relu_en, pool_en;
  logic res_valid = 0, obuf_busy, obuf_done, cap, o_bank, tile_done, busy;
  logic [4:0] nout;
  logic [31:0] perf_starve, perf_wait, perf_overlap, perf_tiles;
  controller dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // channel and output-buffer models
  logic [1:0] lastd = 0;
  int ob_left = 0;
  always_ff @(posedge clk) begin
    lastd     <= {lastd[0], bit_last};
    res_valid <= lastd[0];
    if (cap) ob_left <= int'(nout);
    else if (ob_left > 0) ob_left <= ob_left - 1;
  end
  assign obuf_busy = (ob_left > 0);
  assign obuf_done = (ob_left == 1);

  // command queue of the stimulus and the monitor
  tile_cmd_t q [$];
  tile_cmd_t ld_q [$];
  tile_cmd_t run_q [$];
  int cyc = 0, row = 0, run_len = 0, last_accept = -1, last_hold = -1;
  int acc_iv [$];
  int hold_iv [$];
  logic prev_rd = 0, prev_shift = 0;
  tile_cmd_t cur_ld, cur_run;

  always @(negedge clk) if (rst_n) begin
    cyc++;
    check(sr_shift == prev_rd, $sformatf("cycle %0d: sr_shift does not follow rd_en", cyc));
    if (cmd_valid && cmd_ready) begin
      ld_q.push_back(cmd);
      if (last_accept >= 0) acc_iv.push_back(cyc - last_accept);
      last_accept = cyc;
      row = 0;
    end
    if (rd_en) begin
      cur_ld = ld_q[0];
      check(a_rd_addr == 6'(cur_ld.a_addr + row) && w_rd_addr == 4'(cur_ld.w_addr + row)
            && a_rd_bank == cur_ld.a_bank && w_rd_bank == cur_ld.w_bank,
            $sformatf("cycle %0d: row %0d read address", cyc, row));
      row++;
    end
    if (hold) begin
      check(row == M && !sr_shift,
            $sformatf("cycle %0d: hold before the load finished (row %0d)", cyc, row));
      run_q.push_back(ld_q.pop_front());
      if (last_hold >= 0) hold_iv.push_back(cyc - last_hold);
      last_hold = cyc;
      run_len = 0;
    end
    if (bit_valid) begin
      check(bit_first == (run_len == 0) && bit_last == (run_len == K - 1),
            $sformatf("cycle %0d: first/last flags at bit %0d", cyc, run_len));
      run_len++;
    end
    if (bit_last) check(run_len == K, "bitstream length");
    if (cap) begin
      int en;
      cur_run = run_q.pop_front();
      en = cur_run.fc_mode ? 1 : cur_run.pool_en ? M / 4 : M;
      check(int'(nout) == en && o_addr == 6'(cur_run.o_addr) && o_bank == ~cur_run.a_bank,
            $sformatf("cycle %0d: capture settings", cyc));
      check(fc_mode == cur_run.fc_mode && relu_en == cur_run.relu_en && pool_en == cur_run.pool_en,
            "mode bits during the tile");
    end
    prev_rd = rd_en;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(input tile_cmd_t c);
    cmd_valid = 1; cmd = c;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
  endtask

  initial begin
    tile_cmd_t c;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // non-pipelined: conv+pool, conv, fc
    pipe_en = 0;
    for (int i = 0; i < 3; i++) begin
      c = '0;
      c.a_bank = i[0]; c.a_addr = 8'(17 * i); c.w_bank = ~i[0]; c.w_addr = 8'(5 + i);
      c.o_addr = 8'(50 + i); c.relu_en = 1; c.pool_en = (i == 0); c.fc_mode = (i == 2);
      issue(c);
      @(posedge clk); #1;
    end
    while (busy) @(posedge clk);
    #1;
    check(perf_overlap == 0, "no overlap without pipelining");
    check(acc_iv.size() == 2, "two command intervals measured");
    if (acc_iv.size() == 2) begin
      check(acc_iv[0] == M + K + 5 + M / 4, $sformatf("non-pipelined interval %0d after pooled tile", acc_iv[0]));
      check(acc_iv[1] == M + K + 5 + M,     $sformatf("non-pipelined interval %0d after conv tile", acc_iv[1]));
    end
    // pipelined: five conv tiles back to back
    pipe_en = 1;
    hold_iv.delete();
    last_hold = -1;
    for (int i = 0; i < 5; i++) begin
      c = '0;
      c.a_bank = 0; c.a_addr = 8'(7 * i); c.w_addr = 8'(3 * i); c.o_addr = 8'(16 * i);
      c.relu_en = i[0];
      issue(c);
    end
    while (busy) @(posedge clk);
    #1;
    check(perf_overlap > 0, "load overlapped the bitstream with pipelining");
    check(perf_starve > 0, "compute waited for the first load");
    check(perf_tiles == 8, $sformatf("%0d tiles done", perf_tiles));
    check(hold_iv.size() == 4, "four hold intervals");
    foreach (hold_iv[i]) check(hold_iv[i] == K + 3, $sformatf("pipelined hold interval %0d", hold_iv[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
