// kraken_top: the Kraken engine with its pixel shifter, weights rotator and
// output pipe.
//
// Three AXI-Stream ports face the DRAM side (the DMA and AXI protocol
// converters that feed them are outside this design):
//   s_x_*  X^ packets, 8 bytes per beat: one 64-bit header, then the tiled
//          input pixels of one iteration, R+F words per shifter load;
//   s_k_*  K^ packets, 8 bytes per beat: one 64-bit header, then the
//          C_i*K_H*S_W weight rows of C words for one iteration; the packet of
//          iteration t+1 may arrive while iteration t runs;
//   m_y_*  output sums, R words of WY bits per beat (one channel of R output
//          rows), m_y_last on the last beat of an iteration.
// The pixel shifter (R rows) and the weights rotator (C cores) meet in the
// engine, which consumes a beat of each per clock; the engine hands every
// finished column to the output pipe. Configuration travels with the data:
// the shifter and the rotator read their packet headers, the engine and the
// output pipe follow the tags on the weight beats, so back-to-back layers need
// no global controller. The ev_* outputs pulse once per event and are meant
// for performance counters.
module kraken_top
  import kraken_pkg::*;
#(
  parameter int unsigned R     = R_DEF,
  parameter int unsigned C     = C_DEF,
  parameter int unsigned DEPTH = SRAM_DEPTH_DEF
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          s_x_valid,
  output logic                          s_x_ready,
  input  logic [IN_WORDS-1:0][WX-1:0]   s_x_data,
  input  logic [IN_WORDS-1:0]           s_x_keep,
  input  logic                          s_x_last,
  input  logic                          s_k_valid,
  output logic                          s_k_ready,
  input  logic [IN_WORDS-1:0][WK-1:0]   s_k_data,
  input  logic [IN_WORDS-1:0]           s_k_keep,
  input  logic                          s_k_last,
  output logic                          m_y_valid,
  input  logic                          m_y_ready,
  output logic [R-1:0][WY-1:0]          m_y_data,
  output logic                          m_y_last,
  output logic                          ev_mac,        // engine multiplied
  output logic                          ev_shift_acc,  // shift-accumulate clock
  output logic                          ev_pix_shift,  // pixel bank shifted
  output logic                          ev_swap,       // weight banks swapped
  output logic                          ev_k_wait,     // no kernel ready
  output logic                          ev_out_stall,  // engine held by output pipe
  output logic                          ev_multi_out   // last column released extra sums
);
  logic                   x_valid, x_ready;
  logic [R-1:0][WX-1:0]   x_data;
  cfg_t                   x_cfg;
  logic                   k_valid, k_ready;
  logic [C-1:0][WK-1:0]   k_data;
  ktag_t                  k_tag, snap_tag;
  ecfg_t                  k_cfg, snap_cfg;
  logic                   snap_valid, snap_ready;
  logic [C-1:0][R-1:0][WY-1:0] snap_acc;

  kraken_pixel_shifter #(.R(R)) u_shifter (
    .clk, .rst_n,
    .s_valid(s_x_valid), .s_ready(s_x_ready), .s_data(s_x_data), .s_last(s_x_last), .s_keep(s_x_keep),
    .x_valid, .x_ready, .x_data, .cfg(x_cfg), .shift_evt(ev_pix_shift)
  );

  kraken_weights_rotator #(.C(C), .DEPTH(DEPTH)) u_rotator (
    .clk, .rst_n,
    .s_valid(s_k_valid), .s_ready(s_k_ready), .s_data(s_k_data), .s_last(s_k_last), .s_keep(s_k_keep),
    .k_valid, .k_ready, .k_data, .k_tag, .k_cfg,
    .swap_evt(ev_swap), .wait_evt(ev_k_wait)
  );

  kraken_engine #(.R(R), .C(C)) u_engine (
    .clk, .rst_n,
    .x_valid, .x_ready, .x_data,
    .k_valid, .k_ready, .k_data, .k_tag, .k_cfg,
    .snap_valid, .snap_ready, .snap_acc, .snap_tag, .snap_cfg,
    .mac_fire(ev_mac), .shift_fire(ev_shift_acc)
  );

  kraken_output_pipe #(.R(R), .C(C)) u_out (
    .clk, .rst_n,
    .snap_valid, .snap_ready, .snap_acc, .snap_tag, .snap_cfg,
    .m_valid(m_y_valid), .m_ready(m_y_ready), .m_data(m_y_data), .m_last(m_y_last),
    .multi_evt(ev_multi_out)
  );

  assign ev_out_stall = x_valid && k_valid && k_tag.col_last && !snap_ready;

  // a pixel beat and a weight beat that meet must belong to the same layer
  a_same_layer: assert property (@(posedge clk) disable iff (!rst_n)
                                 (x_valid && k_valid) |-> (x_cfg.kw == k_cfg.kw && x_cfg.sw == k_cfg.sw));
endmodule
