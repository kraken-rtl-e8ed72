// kraken_pixel_shifter: feeds R input pixels per clock to the R rows of the
// PE array and performs the strided vertical convolution by shifting.
//
// An X^ packet starts with a 64-bit configuration header (one beat), loaded
// in one clock; the header is taken only once the previous packet has left.
// The data beats then pass through the adapter whose output width is R+F
// words for the layer's shift factor F = ceil(K_H/S_H) - 1. One adapter is
// built per F in FSET ({0,2,3,4} covers AlexNet, VGG-16 and ResNet-50, as in
// the paper) and the active one is multiplexed into a shift-register bank of
// R + max F words. Registers 0..R-1 drive the engine directly.
//
// For every input channel, S_H beats are loaded. Beat j holds input rows
// j, j+S_H, j+2S_H, ... of the block (the pixel interleaving of X^), so after
// m shifts register r holds row r*S_H + j + m*S_H: the tap k_h = j + m*S_H of
// output row r. After load j the bank is shifted while j + (m+1)*S_H < K_H,
// giving ceil((K_H - j)/S_H) clocks per load and K_H clocks per channel in
// the tap order 0, S_H, 2S_H, ..., 1, 1+S_H, ... (Table II of the paper; the
// kernel stream uses the same order). The next beat is loaded in the clock
// that follows the last shift, so the engine is fed every clock.
module kraken_pixel_shifter
  import kraken_pkg::*;
#(
  parameter int unsigned R    = R_DEF,
  parameter int unsigned MAXF = MAXF_DEF,
  parameter int unsigned NADP = 4,
  parameter int unsigned FSET [NADP] = '{0, 2, 3, 4}
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // X^ from DRAM, header first
  input  logic                         s_valid,
  output logic                         s_ready,
  input  logic [IN_WORDS-1:0][WX-1:0]  s_data,
  input  logic                         s_last,
  input  logic [IN_WORDS-1:0]          s_keep,
  // pixels to the engine
  output logic                         x_valid,
  input  logic                         x_ready,
  output logic [R-1:0][WX-1:0]         x_data,
  output cfg_t                         cfg,        // configuration of the packet in flight
  output logic                         shift_evt   // the bank shifted this clock
);
  localparam int unsigned DEPTH = R + MAXF;

  logic hdr_phase;     // next input beat is a header
  logic busy;          // a packet is inside (adapters or bank)
  cfg_t cfg_q;
  assign cfg = cfg_q;

  // ---------------- adapter bank ----------------
  logic [NADP-1:0]                     a_s_valid, a_s_ready, a_m_valid, a_m_ready, a_m_last;
  logic [NADP-1:0][DEPTH-1:0][WX-1:0]  a_m_data;
  localparam int unsigned SELW = (NADP > 1) ? $clog2(NADP) : 1;
  logic [SELW-1:0]                     sel;

  always_comb begin
    sel = '0;
    for (int unsigned i = 0; i < NADP; i++)
      if (32'(cfg_q.f) == FSET[i]) sel = SELW'(i);
  end

  for (genvar i = 0; i < NADP; i++) begin : g_adp
    logic [R+FSET[i]-1:0][WX-1:0] d;
    kraken_axis_adapter #(.WB(WX), .IN_W(IN_WORDS), .OUT_W(R + FSET[i])) u_adp (
      .clk, .rst_n,
      .s_valid(a_s_valid[i]), .s_ready(a_s_ready[i]), .s_data(s_data), .s_last, .s_keep,
      .m_valid(a_m_valid[i]), .m_ready(a_m_ready[i]), .m_data(d), .m_last(a_m_last[i])
    );
    always_comb begin
      a_m_data[i] = '0;
      for (int unsigned k = 0; k < R + FSET[i]; k++) a_m_data[i][k] = d[k];
    end
  end

  always_comb begin
    a_s_valid = '0;
    a_s_valid[sel] = s_valid && !hdr_phase;
  end
  assign s_ready = hdr_phase ? !busy : a_s_ready[sel];

  // ---------------- shift register bank ----------------
  logic [DEPTH-1:0][WX-1:0] bank;
  logic                     have;        // bank holds a beat
  logic                     have_last;   // ... and it is the packet's last
  logic [KW_BITS:0]         kh_val;      // tap index presented now
  logic [SW_BITS-1:0]       j_load;      // index of the current load
  logic                     out_fire, grp_done, load;

  assign x_valid  = have;
  assign out_fire = have && x_ready;
  assign grp_done = (32'(kh_val) + 32'(cfg_q.s_h) >= 32'(cfg_q.kh));
  // load a new beat into an empty bank or right after the last shift of a group
  assign load     = a_m_valid[sel] && (!have || (out_fire && grp_done));
  always_comb begin
    a_m_ready = '0;
    a_m_ready[sel] = load;
  end
  assign shift_evt = out_fire && !grp_done;

  always_comb
    for (int unsigned r = 0; r < R; r++) x_data[r] = bank[r];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      hdr_phase <= 1'b1;
      busy      <= 1'b0;
      cfg_q     <= '0;
      have      <= 1'b0;
      have_last <= 1'b0;
      kh_val    <= '0;
      j_load    <= '0;
    end else begin
      if (hdr_phase && s_valid && !busy) begin
        cfg_q     <= hdr2cfg(s_data);
        hdr_phase <= 1'b0;
        busy      <= 1'b1;
        j_load    <= '0;
      end else if (!hdr_phase && s_valid && s_ready && s_last) begin
        hdr_phase <= 1'b1;
      end
      if (out_fire && !grp_done) begin
        kh_val <= kh_val + (KW_BITS+1)'(cfg_q.s_h);
      end else if (out_fire && grp_done) begin
        // next load index
        if (32'(j_load) + 1 >= 32'(cfg_q.s_h)) begin
          j_load <= '0;
          kh_val <= '0;
        end else begin
          j_load <= j_load + 1'b1;
          kh_val <= (KW_BITS+1)'(j_load) + 1'b1;
        end
        if (!load) have <= 1'b0;
        if (have_last && !load) busy <= 1'b0;
      end
      if (load) begin
        have      <= 1'b1;
        have_last <= a_m_last[sel];
      end
    end

  always_ff @(posedge clk)
    if (load)
      bank <= a_m_data[sel];
    else if (out_fire && !grp_done)
      for (int unsigned i = 0; i < DEPTH; i++)
        bank[i] <= (i + 1 < DEPTH) ? bank[i + 1] : '0;

endmodule
