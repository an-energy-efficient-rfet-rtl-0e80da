// controller: tile sequencer of the accelerator. A tile is one pass of the
// datapath: M*NIN activations and, per channel, M*NIN weights are loaded into
// the shift registers, then K stochastic bits are streamed, then the results
// are captured into the output buffer and written back.
//  * Load engine: accepts a command (valid/ready), reads one row of NIN bytes
//    per cycle from the activation buffer and from every weight buffer (rows
//    a_addr.. and w_addr.., M reads, data one cycle later, so M+1 cycles),
//    then holds the loaded tile.
//  * Compute engine: when a tile is loaded it pulses hold (shift registers copy
//    into their hold registers) and streams K bits (bit_valid, bit_first,
//    bit_last); it then waits for the channels' res_valid and pulses cap.
//  * pipe_en = 1: the load engine takes the next command as soon as its tile
//    has moved to the compute engine, so loading tile n+1 overlaps the K
//    bitstream cycles of tile n. pipe_en = 0: one tile at a time, load,
//    compute and write-back in sequence (the non-pipelined flow).
// Performance counters: starve (compute idle while a load is in progress,
// i.e. the memory side is the limit), wait (a loaded tile waits for the
// compute engine), overlap (load and bitstream in the same cycle), tiles.
// The idea of overlapping off-chip loading with bitstream computation follows
// the paper. The paper staggers groups of neurons by one bit cycle each as
// their data arrive; this engine overlaps only whole tiles, and its
// handshake, timing and counters are this design's own choices.
module controller
  import scnn_pkg::*;
#(
  parameter int unsigned M   = 16,
  parameter int unsigned K   = 32,
  parameter int unsigned AAW = 6,    // activation buffer row address width
  parameter int unsigned WAW = 4     // weight buffer row address width
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     pipe_en,
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  tile_cmd_t                cmd,
  // shift register loading
  output logic                     rd_en,
  output logic                     a_rd_bank,
  output logic [AAW-1:0]           a_rd_addr,
  output logic                     w_rd_bank,
  output logic [WAW-1:0]           w_rd_addr,
  output logic                     sr_shift,
  output logic                     hold,
  // bitstream
  output logic                     bit_valid,
  output logic                     bit_first,
  output logic                     bit_last,
  output logic                     fc_mode,
  output logic                     relu_en,
  output logic                     pool_en,
  // result capture and write-back
  input  logic                     res_valid,
  input  logic                     obuf_busy,
  input  logic                     obuf_done,
  output logic                     cap,
  output logic [$clog2(M+1)-1:0]   nout,
  output logic [AAW-1:0]           o_addr,
  output logic                     o_bank,
  output logic                     tile_done,
  output logic                     busy,
  output logic [31:0]              perf_starve,
  output logic [31:0]              perf_wait,
  output logic [31:0]              perf_overlap,
  output logic [31:0]              perf_tiles
);
  typedef enum logic [1:0] {L_IDLE, L_LOAD, L_FULL} ld_state_t;
  typedef enum logic [1:0] {C_IDLE, C_RUN, C_WAIT} c_state_t;

  // a new capture must not arrive while the previous tile is still draining
  localparam bit OVERLAP_OK = (K + 1 >= M);

  ld_state_t ld_st;
  c_state_t  c_st;
  tile_cmd_t ld_cmd, run_cmd;
  logic [$clog2(M)-1:0]   row;
  logic [$clog2(K)-1:0]   t;
  logic                   start, accept;

  assign cmd_ready = (ld_st == L_IDLE) &&
                     (pipe_en || (c_st == C_IDLE && !obuf_busy && !cap));
  assign accept    = cmd_valid && cmd_ready;
  assign start     = (ld_st == L_FULL) && !sr_shift && (c_st == C_IDLE) &&
                     (OVERLAP_OK || !obuf_busy);

  // load engine
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_st    <= L_IDLE;
      row      <= '0;
      sr_shift <= 1'b0;
      ld_cmd   <= '0;
    end else begin
      sr_shift <= rd_en;
      case (ld_st)
        L_IDLE: if (accept) begin
          ld_cmd <= cmd;
          row    <= '0;
          ld_st  <= L_LOAD;
        end
        L_LOAD: begin
          row <= row + 1'b1;
          if (row == $clog2(M)'(M - 1)) ld_st <= L_FULL;
        end
        L_FULL: if (start) ld_st <= L_IDLE;
        default: ld_st <= L_IDLE;
      endcase
    end
  end
  assign rd_en     = (ld_st == L_LOAD);
  assign a_rd_bank = ld_cmd.a_bank;
  assign w_rd_bank = ld_cmd.w_bank;
  assign a_rd_addr = AAW'(ld_cmd.a_addr) + AAW'(row);
  assign w_rd_addr = WAW'(ld_cmd.w_addr) + WAW'(row);

  // compute engine
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_st    <= C_IDLE;
      t       <= '0;
      run_cmd <= '0;
    end else begin
      case (c_st)
        C_IDLE: if (start) begin
          run_cmd <= ld_cmd;
          t       <= '0;
          c_st    <= C_RUN;
        end
        C_RUN: begin
          t <= t + 1'b1;
          if (t == $clog2(K)'(K - 1)) c_st <= C_WAIT;
        end
        C_WAIT: if (res_valid) c_st <= C_IDLE;
        default: c_st <= C_IDLE;
      endcase
    end
  end
  assign hold      = start;
  assign bit_valid = (c_st == C_RUN);
  assign bit_first = bit_valid && (t == '0);
  assign bit_last  = bit_valid && (t == $clog2(K)'(K - 1));
  assign fc_mode   = run_cmd.fc_mode;
  assign relu_en   = run_cmd.relu_en;
  assign pool_en   = run_cmd.pool_en;

  assign cap    = (c_st == C_WAIT) && res_valid;
  assign nout   = run_cmd.fc_mode ? ($clog2(M+1))'(1) :
                  run_cmd.pool_en ? ($clog2(M+1))'(M / 4) : ($clog2(M+1))'(M);
  assign o_addr = AAW'(run_cmd.o_addr);
  assign o_bank = ~run_cmd.a_bank;   // results go to the other activation bank

  assign tile_done = obuf_done;
  assign busy      = (ld_st != L_IDLE) || (c_st != C_IDLE) || obuf_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      perf_starve  <= '0;
      perf_wait    <= '0;
      perf_overlap <= '0;
      perf_tiles   <= '0;
    end else begin
      if (c_st == C_IDLE && ld_st == L_LOAD) perf_starve  <= perf_starve + 1;
      if (ld_st == L_FULL && !start)         perf_wait    <= perf_wait + 1;
      if (c_st == C_RUN && ld_st == L_LOAD)  perf_overlap <= perf_overlap + 1;
      if (obuf_done)                         perf_tiles   <= perf_tiles + 1;
    end
  end

  // rules of the handshake and of the write-back
  a_cap_free: assert property (@(posedge clk) disable iff (!rst_n) cap |-> !obuf_busy)
    else $error("controller: capture while the output buffer drains");
  a_cmd_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && !cmd_ready) |=> cmd_valid)
    else $error("controller: cmd_valid dropped before it was accepted");
endmodule
