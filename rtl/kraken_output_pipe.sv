// kraken_output_pipe: takes a copy of all R x C accumulators at the end of
// every input column, keeps only the full output sums, and sends them out as
// an R-word-wide AXI-Stream, one core (R output rows of one channel) per beat.
//
// Which cores hold full sums follows from the elastic grouping: in a group of
// G = K_W + S_W - 1 cores, at column w core g works on channel
// c = (g - w) mod S_W and tap k_w = g - c, so its sum is complete when
// k_w = K_W - 1, or, at the last column of the block, when the missing taps
// fall on the implicit right zero padding (k_w >= floor(K_W/2)). Sums whose
// centre w - k_w + floor(K_W/2) lies left of the image (the first columns) and
// cores with k_w >= K_W (duplicates) are dropped. With S_W = 1 this is the
// last core of every group in each column and ceil(K_W/2) cores at the last
// column; with S_W > 1 it is S_W adjacent cores, i.e. E*S_W channels, on the
// columns of one stride phase (the paper's Tables III and IV). Fully-connected
// layers and matrix products (G = 1) release all C cores.
//
// Two banks of R x C words: the capture bank takes the copy (snap_ready is
// high while it is free) and hands it to the drain bank as soon as that is
// empty; the drain bank sends its marked cores lowest core first, one per
// clock. m_last marks the last beat of an iteration. The paper describes a
// first bank that shifts along C and a multiplexer bank feeding a second bank
// of R*floor(C/3) words; this design keeps the two-bank idea but picks the
// marked cores with a priority encoder and gives the second bank all C cores,
// so K_W = 1 layers (E*S_W = C) fit too.
module kraken_output_pipe
  import kraken_pkg::*;
#(
  parameter int unsigned R = R_DEF,
  parameter int unsigned C = C_DEF
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        snap_valid,
  output logic                        snap_ready,
  input  logic [C-1:0][R-1:0][WY-1:0] snap_acc,
  input  ktag_t                       snap_tag,
  input  ecfg_t                       snap_cfg,
  output logic                        m_valid,
  input  logic                        m_ready,
  output logic [R-1:0][WY-1:0]        m_data,
  output logic                        m_last,
  output logic                        multi_evt   // a last column released extra sums
);
  localparam int unsigned CI = $clog2(C);

  // ---------------- which cores hold full sums ----------------
  logic [5:0]               g_size;
  logic [$clog2(C+1)-1:0]   e_num;
  logic [C-1:0][5:0]        g_pos;
  logic [C-1:0]             g_first, active, mask_in;
  logic [SW_BITS-1:0]       c_ch;
  logic [5:0]               tap, half;

  kraken_eg_map #(.C(C)) u_eg (
    .kw(snap_cfg.kw), .sw(snap_cfg.sw),
    .g_size, .e_num, .g_pos, .g_first, .active
  );

  always_comb begin
    half = 6'(snap_cfg.kw >> 1);
    c_ch = '0;
    tap  = '0;
    for (int unsigned j = 0; j < C; j++) begin
      // channel of core g: (g - w) mod S_W, stepped along the group
      if (g_first[j])
        c_ch = (snap_tag.w_phase == 0) ? '0 : snap_cfg.sw - snap_tag.w_phase;
      else
        c_ch = (c_ch == snap_cfg.sw - 1'b1) ? '0 : c_ch + 1'b1;
      tap = g_pos[j] - 6'(c_ch);
      mask_in[j] = active[j]
                && (tap <= 6'(snap_cfg.kw) - 6'd1)
                && (32'(snap_tag.w_idx) + 32'(half) >= 32'(tap))
                && ((tap == 6'(snap_cfg.kw) - 6'd1) || (snap_tag.w_last && tap >= half));
    end
  end

  // ---------------- capture and drain banks ----------------
  logic [C-1:0][R-1:0][WY-1:0] acc_a, acc_b;
  logic [C-1:0]                mask_a, mask_b;
  logic                        full_a, last_a, last_b;
  logic                        move, pop;
  logic [CI-1:0]               idx;

  assign snap_ready = !full_a;
  assign multi_evt  = snap_valid && snap_tag.w_last && ($countones(mask_in) > 32'(e_num) * 32'(snap_cfg.sw));

  // lowest marked core of the drain bank
  always_comb begin
    idx = '0;
    for (int j = C - 1; j >= 0; j--)
      if (mask_b[j]) idx = CI'(j);
  end

  assign m_valid = |mask_b;
  assign m_data  = acc_b[idx];
  assign m_last  = last_b && ((mask_b & (mask_b - 1'b1)) == '0);
  assign pop     = m_valid && m_ready;
  // the drain bank is (or is becoming) empty
  assign move    = full_a && (!m_valid || (pop && m_last) ||
                              (pop && ((mask_b & (mask_b - 1'b1)) == '0)));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      full_a <= 1'b0;
      mask_a <= '0;
      last_a <= 1'b0;
      mask_b <= '0;
      last_b <= 1'b0;
    end else begin
      if (pop) mask_b[idx] <= 1'b0;
      if (move) begin
        mask_b <= mask_a;
        last_b <= last_a;
        full_a <= 1'b0;
      end
      if (snap_valid && |mask_in) begin
        full_a <= 1'b1;
        mask_a <= mask_in;
        last_a <= snap_tag.iter_last;
      end
    end

  always_ff @(posedge clk) begin
    if (snap_valid) acc_a <= snap_acc;
    if (move)       acc_b <= acc_a;
  end

  a_capture: assert property (@(posedge clk) disable iff (!rst_n) snap_valid |-> !full_a);
endmodule
