// scnn_top: stochastic-computing CNN accelerator with L channels.
// Data path of one tile:
//   off-chip memory --ext port--> activation ping-pong buffer and per-channel
//   weight ping-pong buffers --> activation shift register (shared) and weight
//   shift registers (one per channel) --> activation SNG (shared, RNG X) and
//   weight SNGs --> per channel: M MACs of NIN XNOR multipliers and a parallel
//   counter, DFF, selectable adder tree, B2S, ReLU / max pooling, S2B -->
//   output buffer --> other bank of the activation buffer (next layer's input).
// Interface:
//   ext_*   off-chip write port: ext_tgt 0 selects the activation buffer,
//           ext_tgt = c+1 the weight buffer of channel c; XR rows of NIN bytes
//           from row ext_addr in bank ext_bank. All buffer addresses are rows.
//   cmd_*   one tile command per valid/ready handshake (scnn_pkg::tile_cmd_t).
//           pipe_en chooses overlapped (1) or sequential (0) load and compute.
//   hr_*    read-back of one activation-buffer row, one cycle after address.
//   tile_done pulses when a tile's results have been written back.
// With the defaults a pipelined tile takes K+3 cycles when the M+1-cycle load
// is shorter than the bitstream. Values are 8-bit offset-binary numbers that
// the PCCs read as the probability value/256 of a bipolar stream.
// The block structure follows the paper's architecture figure; buffer sizes,
// port widths, the command format and the result layout are this design's.
module scnn_top
  import scnn_pkg::*;
#(
  parameter int unsigned L          = NUM_CH,
  parameter int unsigned M          = NUM_MAC,
  parameter int unsigned NIN        = MAC_IN,
  parameter int unsigned K          = BIT_LEN,
  parameter int unsigned W          = VAL_W,
  parameter int unsigned AROWS      = ABUF_ROWS,
  parameter int unsigned WROWS      = WBUF_ROWS,
  parameter int unsigned XR         = EXT_ROWS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // off-chip memory write port
  input  logic                 ext_we,
  input  logic [7:0]           ext_tgt,
  input  logic                 ext_bank,
  input  logic [7:0]           ext_addr,
  input  logic [XR-1:0][NIN-1:0][7:0] ext_data,
  // tile commands
  input  logic                 pipe_en,
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  tile_cmd_t            cmd,
  output logic                 tile_done,
  output logic                 busy,
  // activation buffer read-back
  input  logic                 hr_bank,
  input  logic [7:0]           hr_addr,
  output logic [NIN-1:0][7:0]  hr_row,
  // performance counters
  output logic [31:0]          perf_starve,
  output logic [31:0]          perf_wait,
  output logic [31:0]          perf_overlap,
  output logic [31:0]          perf_tiles
);
  localparam int unsigned AAW = $clog2(AROWS);
  localparam int unsigned WAW = $clog2(WROWS);

  // controller
  logic             rd_en, a_rd_bank, w_rd_bank, sr_shift, hold;
  logic [AAW-1:0]   a_rd_addr, o_addr, ob_addr;
  logic [WAW-1:0]   w_rd_addr;
  logic             bit_valid, bit_first, bit_last, fc_mode, relu_en, pool_en;
  logic             res_valid, obuf_busy, obuf_done, cap, o_bank;
  logic [$clog2(M+1)-1:0] nout;
  logic [L-1:0]     ch_res_valid;

  controller #(.M(M), .K(K), .AAW(AAW), .WAW(WAW)) u_ctrl (
    .clk, .rst_n, .pipe_en, .cmd_valid, .cmd_ready, .cmd,
    .rd_en, .a_rd_bank, .a_rd_addr, .w_rd_bank, .w_rd_addr, .sr_shift, .hold,
    .bit_valid, .bit_first, .bit_last, .fc_mode, .relu_en, .pool_en,
    .res_valid, .obuf_busy, .obuf_done, .cap, .nout, .o_addr, .o_bank,
    .tile_done, .busy, .perf_starve, .perf_wait, .perf_overlap, .perf_tiles);
  assign res_valid = ch_res_valid[0];

  // output buffer
  logic [L-1:0][M-1:0][W-1:0] results;
  logic                       ob_we;
  logic [NIN-1:0][7:0]        ob_data;
  logic                       o_bank_q;
  output_buffer #(.L(L), .M(M), .ROW_BYTES(NIN), .AW(AAW)) u_obuf (
    .clk, .rst_n, .cap, .vals(results), .nout, .o_addr,
    .wr_en(ob_we), .wr_addr(ob_addr), .wr_data(ob_data), .busy(obuf_busy), .done(obuf_done));
  always_ff @(posedge clk) if (cap) o_bank_q <= o_bank;

  // activation ping-pong buffer, shift register and shared SNG (RNG X)
  logic [NIN-1:0][7:0]          a_row;
  logic [M-1:0][NIN-1:0][7:0]   a_vals;
  logic [M-1:0][NIN-1:0]        a_bits;
  logic [W-1:0]                 rnd_x;
  pingpong_buf #(.ROWS(AROWS), .ROW_BYTES(NIN), .EXT_ROWS(XR)) u_abuf (
    .clk,
    .ext_we(ext_we && ext_tgt == 8'd0), .ext_bank, .ext_addr(AAW'(ext_addr)), .ext_data,
    .int_we(ob_we), .int_bank(o_bank_q), .int_addr(ob_addr), .int_data(ob_data),
    .rd_en, .rd_bank(a_rd_bank), .rd_addr(a_rd_addr), .rd_row(a_row),
    .hr_bank, .hr_addr(AAW'(hr_addr)), .hr_row);
  shift_reg #(.ROWS(M), .ROW_BYTES(NIN)) u_asr (
    .clk, .shift(sr_shift), .row_in(a_row), .hold, .vals(a_vals));
  sng #(.NUM(M*NIN), .W(W), .SEED(W'(8'hE1))) u_asng (
    .clk, .rst_n, .en(bit_valid), .vals(a_vals), .bits(a_bits), .rnd(rnd_x));

  // channels, each with its own weight ping-pong buffer
  for (genvar c = 0; c < L; c++) begin : g_ch
    logic [NIN-1:0][7:0] w_row;
    logic [NIN-1:0][7:0] unused_hr;
    pingpong_buf #(.ROWS(WROWS), .ROW_BYTES(NIN), .EXT_ROWS(XR)) u_wbuf (
      .clk,
      .ext_we(ext_we && ext_tgt == 8'(c + 1)), .ext_bank, .ext_addr(WAW'(ext_addr)), .ext_data,
      .int_we(1'b0), .int_bank(1'b0), .int_addr('0), .int_data('0),
      .rd_en, .rd_bank(w_rd_bank), .rd_addr(w_rd_addr), .rd_row(w_row),
      .hr_bank(1'b0), .hr_addr('0), .hr_row(unused_hr));
    channel #(.M(M), .NIN(NIN), .K(K), .W(W), .SEED(W'(8'h5A + 8'(3 * c)))) u_ch (
      .clk, .rst_n, .w_shift(sr_shift), .w_row, .hold,
      .bit_valid, .bit_first, .bit_last, .fc_mode, .relu_en, .pool_en,
      .a_bits, .rnd_x, .results(results[c]), .res_valid(ch_res_valid[c]));
  end
endmodule
