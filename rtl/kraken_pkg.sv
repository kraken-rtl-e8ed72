// kraken_pkg: sizes, the layer configuration header and the tags that travel
// with the data through the Kraken accelerator.
//
// The array is R rows by C cores (7 x 96 in the main configuration); every
// word is 8 bits and both SRAM banks of the weights rotator are 2048 rows deep,
// all as in the paper. The accumulator width, the DRAM beat width and the bit
// layout of the 64-bit configuration header are this design's own choices: the
// paper only says the header is 64 bits and carries K_H, K_W, S_H, S_W, C_i and F.
// W and N*L are added to the header so that the weights rotator knows how many
// times to rotate an iteration.
package kraken_pkg;

  localparam int unsigned R_DEF        = 7;    // rows of the PE array
  localparam int unsigned C_DEF        = 96;   // cores of the PE array
  localparam int unsigned WX           = 8;    // input pixel width
  localparam int unsigned WK           = 8;    // weight width
  localparam int unsigned WY           = 32;   // accumulator / output width (assumed)
  localparam int unsigned IN_WORDS     = 8;    // words per DRAM beat (64-bit bus, assumed)
  localparam int unsigned MAXF_DEF     = 4;    // max F over AlexNet, VGG-16, ResNet-50
  localparam int unsigned SRAM_DEPTH_DEF = 2048; // max{S_W C_i K_W}
  localparam int unsigned HDR_BITS     = 64;

  // Field widths of the configuration header.
  localparam int unsigned KW_BITS  = 4;   // kernel size, 1..15
  localparam int unsigned SW_BITS  = 3;   // stride, 1..7
  localparam int unsigned CI_BITS  = 12;  // input channels, 1..4095
  localparam int unsigned F_BITS   = 3;   // shift factor, 0..7
  localparam int unsigned W_BITS   = 11;  // input width, 1..2047
  localparam int unsigned NL_BITS  = 12;  // N*L blocks per iteration, 1..4095

  // Layer configuration as carried in the header (bit 0 = LSB of the beat):
  //   [3:0] K_H  [7:4] K_W  [10:8] S_H  [13:11] S_W  [25:14] C_i
  //   [28:26] F  [39:29] W  [51:40] N*L  [63:52] reserved (zero)
  typedef struct packed {
    logic [11:0]         rsvd;
    logic [NL_BITS-1:0]  nl;
    logic [W_BITS-1:0]   w;
    logic [F_BITS-1:0]   f;
    logic [CI_BITS-1:0]  ci;
    logic [SW_BITS-1:0]  sw;
    logic [SW_BITS-1:0]  s_h;
    logic [KW_BITS-1:0]  kw;
    logic [KW_BITS-1:0]  kh;
  } cfg_t;

  // Tags the weights rotator attaches to every weight beat. The engine and the
  // output pipe react only to these (decentralised control).
  typedef struct packed {
    logic               col_first;  // first (c_i, k_h) beat of an input column
    logic               col_last;   // last (c_i, k_h) beat of an input column
    logic               w_first;    // column w == 0 of a block: clear accumulators
    logic               w_last;     // column w == W-1 of a block
    logic               iter_last;  // last column of the iteration
    logic [SW_BITS-1:0] w_phase;    // w % S_W
    logic [W_BITS-1:0]  w_idx;      // column index w inside the block
  } ktag_t;

  // Configuration fields the engine and the output pipe need.
  typedef struct packed {
    logic [KW_BITS-1:0] kw;
    logic [SW_BITS-1:0] sw;
  } ecfg_t;

  function automatic cfg_t hdr2cfg(input logic [HDR_BITS-1:0] h);
    return cfg_t'(h);
  endfunction

endpackage
