// kraken_engine: the R x C array of processing elements.
//
// Row r of every core receives pixel word r of the pixel shifter; all R PEs
// of core j receive weight word j of the weights rotator (broadcast), as in
// the paper. A beat is consumed when both streams are valid; it is one clock
// of the vertical-convolution / depthwise loop (one (c_i, k_h) pair).
//
// Horizontal convolution: when a weight beat tagged col_first arrives and the
// layer has K_W != 1, the engine first spends one clock with the multipliers
// paused (q_s = 1 in the paper). In that clock each accumulator loads the sum
// of the core on its left; the first core of every elastic group, and every
// core when the beat starts column w = 0 of a block, loads zero instead
// (group edge and new block). For K_W = 1 layers, fully-connected layers and
// matrix products no clock is spent: the col_first beat itself uses the
// accumulator bypass.
//
// After the last beat of a column (col_last) the accumulators hold the sums of
// that column; on the next clock snap_valid is high for one clock and the
// output pipe copies acc. The engine takes a col_last beat only while
// snap_ready is high, so an output pipe that has not drained stalls it (this
// back-pressure rule is this design's own; the paper sizes the output pipe so
// that it never stalls). All control comes from the tags and configuration
// carried with the weight beats, so layers follow each other without a pause.
module kraken_engine
  import kraken_pkg::*;
#(
  parameter int unsigned R = R_DEF,
  parameter int unsigned C = C_DEF
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // pixels from the pixel shifter
  input  logic                            x_valid,
  output logic                            x_ready,
  input  logic [R-1:0][WX-1:0]            x_data,
  // weights, tags and configuration from the weights rotator
  input  logic                            k_valid,
  output logic                            k_ready,
  input  logic [C-1:0][WK-1:0]            k_data,
  input  ktag_t                           k_tag,
  input  ecfg_t                           k_cfg,
  // copy of the accumulators to the output pipe
  output logic                            snap_valid,
  input  logic                            snap_ready,
  output logic [C-1:0][R-1:0][WY-1:0]     snap_acc,
  output ktag_t                           snap_tag,
  output ecfg_t                           snap_cfg,
  // activity, for performance counters
  output logic                            mac_fire,
  output logic                            shift_fire
);
  localparam logic [1:0] SEL_OWN  = 2'd0;
  localparam logic [1:0] SEL_LEFT = 2'd1;
  localparam logic [1:0] SEL_ZERO = 2'd2;

  logic [5:0]               g_size;
  logic [$clog2(C+1)-1:0]   e_num;
  logic [C-1:0][5:0]        g_pos;
  logic [C-1:0]             g_first, active;

  kraken_eg_map #(.C(C)) u_eg (
    .kw(k_cfg.kw), .sw(k_cfg.sw),
    .g_size, .e_num, .g_pos, .g_first, .active
  );

  logic shifted;     // the shift clock of the current column has been spent
  logic need_shift, kw_is_1;

  assign kw_is_1    = (k_cfg.kw == KW_BITS'(1));
  assign need_shift = k_valid && k_tag.col_first && !kw_is_1 && !shifted;
  assign mac_fire   = x_valid && k_valid && !need_shift && (!k_tag.col_last || snap_ready);
  assign shift_fire = need_shift;
  assign x_ready    = mac_fire;
  assign k_ready    = mac_fire;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)          shifted <= 1'b0;
    else if (shift_fire) shifted <= 1'b1;
    else if (mac_fire)   shifted <= 1'b0;

  // PE array
  logic [C-1:0][R-1:0][WY-1:0] acc;
  logic [C-1:0][1:0]           sel;

  always_comb
    for (int unsigned j = 0; j < C; j++) begin
      if (shift_fire)
        sel[j] = (k_tag.w_first || g_first[j] || !active[j]) ? SEL_ZERO : SEL_LEFT;
      else if (k_tag.col_first && kw_is_1)
        sel[j] = SEL_ZERO;
      else
        sel[j] = SEL_OWN;
    end

  for (genvar j = 0; j < C; j++) begin : g_core
    for (genvar r = 0; r < R; r++) begin : g_row
      logic [WY-1:0] left;
      if (j == 0) begin : g_edge
        assign left = '0;
      end else begin : g_mid
        assign left = acc[j-1][r];
      end
      kraken_pe u_pe (
        .clk, .en(mac_fire || shift_fire), .mul_en(mac_fire), .sel(sel[j]),
        .x(x_data[r]), .k(k_data[j]), .acc_left(left), .acc(acc[j][r])
      );
    end
  end

  // hand the finished column to the output pipe
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) snap_valid <= 1'b0;
    else        snap_valid <= mac_fire && k_tag.col_last;

  always_ff @(posedge clk)
    if (mac_fire && k_tag.col_last) begin
      snap_tag <= k_tag;
      snap_cfg <= k_cfg;
    end

  assign snap_acc = acc;

  // the pipe must be free whenever a copy is handed over
  a_snap: assert property (@(posedge clk) disable iff (!rst_n) snap_valid |-> snap_ready);
endmodule
