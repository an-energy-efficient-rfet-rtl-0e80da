// scnn_pkg: constants and types shared by the stochastic-computing accelerator.
// The sizes here are the defaults of the design: 8 channels of 16 MAC units,
// 25 multipliers per MAC, 8-bit values and a 32-bit stochastic bitstream.
// The tile command and mode encoding are this design's own choice.
package scnn_pkg;
  localparam int unsigned VAL_W     = 8;    // system precision (bits)
  localparam int unsigned NUM_CH    = 8;    // channels L
  localparam int unsigned NUM_MAC   = 16;   // MAC units per channel M
  localparam int unsigned MAC_IN    = 25;   // multipliers per MAC (5x5 kernel)
  localparam int unsigned BIT_LEN   = 32;   // bitstream length k
  // On-chip buffers hold rows of MAC_IN bytes, the data of one MAC per cycle.
  // 2 x 64 activation rows + 8 channels x 2 x 16 weight rows = 9.6 kB.
  localparam int unsigned ABUF_ROWS = 64;   // rows per activation bank
  localparam int unsigned WBUF_ROWS = 16;   // rows per weight bank, per channel
  localparam int unsigned EXT_ROWS  = 8;    // rows per off-chip beat (200 B)

  // Tile command: where to read activations and weights, where to put results,
  // and how the channel datapath is configured.
  typedef struct packed {
    logic        a_bank;   // activation ping-pong bank to read
    logic [7:0]  a_addr;   // first row of the M activation rows
    logic        w_bank;   // weight ping-pong bank to read
    logic [7:0]  w_addr;   // first row of each channel's M weight rows
    logic [7:0]  o_addr;   // first result row in the other activation bank
    logic        fc_mode;  // 1: adder tree sums all MACs (fully connected)
    logic        relu_en;  // 1: ReLU on
    logic        pool_en;  // 1: 2x2 max pooling on (conv mode only)
  } tile_cmd_t;
endpackage
