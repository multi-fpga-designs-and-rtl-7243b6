// Shared constants and types of the HPCC FPGA kernels.
//
// The external serial channels of the board are 32 bytes wide (256 bits) and are
// modelled as valid/ready streams. PTRANS moves CHANNEL_WIDTH single-precision values
// per channel word; b_eff moves raw bytes. The channel width follows the board's
// channel specification (32 B); the valid/ready handshake is this design's choice.
package hpcc_pkg;

  // Width of one external serial channel word.
  localparam int unsigned CH_BYTES = 32;
  localparam int unsigned CH_BITS  = CH_BYTES * 8;


  typedef logic [CH_BITS-1:0] ch_word_t;
  typedef logic [31:0]        fp32_t;

  // Which benchmark owns the external channels of a node.
  typedef enum logic [0:0] {
    BENCH_BEFF   = 1'b0,
    BENCH_PTRANS = 1'b1
  } bench_sel_e;

endpackage
