// channel: one processing channel of the accelerator. Its weight shift
// register is loaded row by row from the channel's weight buffer; the hold copy
// drives a weight SNG (M*NIN PCCs sharing this channel's own LFSR, "RNG W").
// Each of the M MAC units multiplies NIN activation streams (shared by all
// channels) with NIN weight streams and counts the products. A register stage
// (the DFF of the block diagram) follows the MACs; it also delays the
// activation random number so that the B2S converters use the number of the
// same bitstream position. After it come the selectable adder tree (all M
// counts summed for fully connected layers), M B2S converters, the optional
// ReLU/max-pooling stage and M S2B counters.
// Timing: bit_valid marks the K cycles of a bitstream (bit_first its first
// cycle, bit_last its last).
// The S2B counters see each bit one cycle later, and res_valid pulses one
// cycle after the last bit was counted, when results holds the final values;
// they stay until the next bitstream's first bit is counted.
// Conv mode: lane j result = output pixel j of this channel's filter; with
// pooling, lanes 4j..4j+3 are one 2x2 window and result j < M/4 holds it.
// FC mode: result 0 is one neuron of M*NIN inputs.
// The block order follows the paper's block diagram; lane mapping, scaling
// and the per-channel LFSR seed are this design's choices.
module channel #(
  parameter int unsigned M    = 16,
  parameter int unsigned NIN  = 25,
  parameter int unsigned K    = 32,
  parameter int unsigned W    = 8,
  parameter logic [W-1:0] SEED = W'(8'h5A)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // weight loading
  input  logic                          w_shift,
  input  logic [NIN-1:0][7:0]           w_row,
  input  logic                          hold,
  // bitstream control and configuration
  input  logic                          bit_valid,
  input  logic                          bit_first,
  input  logic                          bit_last,
  input  logic                          fc_mode,
  input  logic                          relu_en,
  input  logic                          pool_en,
  // shared activation streams and RNG X
  input  logic [M-1:0][NIN-1:0]         a_bits,
  input  logic [W-1:0]                  rnd_x,
  // results
  output logic [M-1:0][W-1:0]           results,
  output logic                          res_valid
);
  localparam int unsigned CW    = $clog2(NIN + 1);   // one MAC count
  localparam int unsigned SUM_W = CW + $clog2(M);    // adder tree sum

  // weight shift register and weight SNG
  logic [M-1:0][NIN-1:0][7:0] w_vals;
  logic [M-1:0][NIN-1:0]      w_bits;
  logic [W-1:0]               rnd_w;
  shift_reg #(.ROWS(M), .ROW_BYTES(NIN)) u_wsr (
    .clk, .shift(w_shift), .row_in(w_row), .hold, .vals(w_vals));
  sng #(.NUM(M*NIN), .W(W), .SEED(SEED)) u_wsng (
    .clk, .rst_n, .en(bit_valid), .vals(w_vals), .bits(w_bits), .rnd(rnd_w));

  // MAC units
  logic [M-1:0][CW-1:0] cnt, cnt_q;
  for (genvar m = 0; m < M; m++) begin : g_mac
    mac #(.NIN(NIN), .W(CW)) u_mac (.a_bits(a_bits[m]), .w_bits(w_bits[m]), .count(cnt[m]));
  end

  // DFF stage
  logic [W-1:0] rnd_q;
  logic         v_q, f_q, last_q;
  always_ff @(posedge clk) begin
    cnt_q <= cnt;
    rnd_q <= rnd_x;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0; f_q <= 1'b0; last_q <= 1'b0; res_valid <= 1'b0;
    end else begin
      v_q       <= bit_valid;
      f_q       <= bit_first;
      last_q    <= bit_valid & bit_last;   // high while the last bit is counted
      res_valid <= last_q;
    end
  end

  // selectable adder tree
  logic [SUM_W-1:0] tree_sum;
  adder_tree #(.M(M), .W(CW), .SW(SUM_W)) u_tree (.fc_mode, .counts(cnt_q), .sum(tree_sum));

  // B2S converters: lane 0 takes the tree sum in FC mode, otherwise every lane
  // takes its own MAC count placed on the same scale as the tree sum.
  logic [M-1:0] sum_bits, zero_bits, out_bits;
  for (genvar m = 0; m < M; m++) begin : g_b2s
    logic [SUM_W-1:0] b_in;
    if (m == 0) begin : g_l0
      assign b_in = fc_mode ? tree_sum : (SUM_W'(cnt_q[m]) << $clog2(M));
    end else begin : g_ln
      assign b_in = SUM_W'(cnt_q[m]) << $clog2(M);
    end
    b2s #(.SUM_W(SUM_W), .NIN(M*NIN), .W(W)) u_b2s (
      .sum(b_in), .rnd(rnd_q), .bit_o(sum_bits[m]), .zero_bit(zero_bits[m]));
  end

  // ReLU / pooling
  relu_pool #(.M(M)) u_rp (
    .relu_en, .pool_en(pool_en & ~fc_mode), .sum_bits, .zero_bits, .out_bits);

  // S2B converters
  for (genvar m = 0; m < M; m++) begin : g_s2b
    s2b #(.K(K), .W(W)) u_s2b (
      .clk, .rst_n, .clr(f_q), .en(v_q), .bit_i(out_bits[m]), .value(results[m]));
  end

  logic unused_rnd_w;
  assign unused_rnd_w = ^rnd_w;
endmodule
