// kraken_weights_rotator: the two global weight buffers and their control.
//
// Two SRAM banks of C words by DEPTH rows swap roles once per iteration (the
// paper's W-SRAM and R-SRAM). While the R-SRAM is rotated to the engine, the
// K^ packet of the next iteration arrives on s_* (a 64-bit header, then
// C_i*K_H*S_W rows of C words, through an 8 -> C word adapter) and is written
// into the W-SRAM. When the current iteration has issued its last row and
// the W-SRAM is full, the banks swap in the same clock and rotation goes on
// without a pause; if the next kernel is not there yet, the engine waits.
//
// Rotation order: for each of the N*L blocks and each of the W input
// columns, the rows (c_i, k_h) are read in order; column w reads the rows of
// phase s_w = w mod S_W, i.e. row ((c_i*K_H + k_h)*S_W + w mod S_W) of
// K^[T, C_i, K_H, S_W][C]. Each beat carries tags (first/last of a column,
// first/last column of a block, last column of the iteration, w and w mod S_W)
// and the layer's K_W and S_W, which is all the engine and the output pipe
// need to reconfigure themselves when the beat reaches them.
//
// The SRAM's one-clock read latency is hidden by a two-entry register FIFO
// (the paper's 2-stage AXI-Stream register pipeline): a row is read only when
// the FIFO will have room for it, so a full-rate consumer gets one beat per
// clock. Header layout and tags are this design's; see kraken_pkg.
module kraken_weights_rotator
  import kraken_pkg::*;
#(
  parameter int unsigned C     = C_DEF,
  parameter int unsigned DEPTH = SRAM_DEPTH_DEF
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // K^ from DRAM, header first (low-priority prefetch)
  input  logic                         s_valid,
  output logic                         s_ready,
  input  logic [IN_WORDS-1:0][WK-1:0]  s_data,
  input  logic                         s_last,
  input  logic [IN_WORDS-1:0]          s_keep,
  // weights to the engine
  output logic                         k_valid,
  input  logic                         k_ready,
  output logic [C-1:0][WK-1:0]         k_data,
  output ktag_t                        k_tag,
  output ecfg_t                        k_cfg,
  // events
  output logic                         swap_evt,   // banks swapped roles
  output logic                         wait_evt    // no kernel ready to rotate
);
  localparam int unsigned AW = $clog2(DEPTH);

  // ---------------- fill side ----------------
  logic            hdr_phase, filling, next_ready, rd_bank;
  cfg_t            next_cfg, cur_cfg;
  logic [AW-1:0]   wr_addr;
  logic            a_s_valid, a_s_ready, a_m_valid, a_m_last, wr_fire;
  logic [C-1:0][WK-1:0] a_m_data;

  kraken_axis_adapter #(.WB(WK), .IN_W(IN_WORDS), .OUT_W(C)) u_adp (
    .clk, .rst_n,
    .s_valid(a_s_valid), .s_ready(a_s_ready), .s_data, .s_last, .s_keep,
    .m_valid(a_m_valid), .m_ready(filling), .m_data(a_m_data), .m_last(a_m_last)
  );

  logic hdr_take;
  assign hdr_take  = hdr_phase && s_valid && !next_ready && !filling;
  assign a_s_valid = s_valid && !hdr_phase;
  assign s_ready   = hdr_phase ? (!next_ready && !filling) : a_s_ready;
  assign wr_fire   = filling && a_m_valid;

  // ---------------- rotate side ----------------
  logic                 cur_valid;
  logic [CI_BITS-1:0]   ci_c;
  logic [KW_BITS-1:0]   kh_c;
  logic [W_BITS-1:0]    w_c;
  logic [NL_BITS-1:0]   nl_c;
  logic [SW_BITS-1:0]   ph_c;
  logic [AW-1:0]        base_c;
  logic                 issue, pop, inflight;
  logic [1:0]           cnt;
  ktag_t                tag_i, tag_p;
  ecfg_t                cfg_i, cfg_p;
  logic                 col_last_i, iter_end_i, swap;

  assign pop       = k_valid && k_ready;
  // read a row only if the FIFO will have room for it
  assign issue     = cur_valid && ({1'b0, cnt} + {2'b0, inflight} - {2'b0, pop} < 3'd2);
  assign col_last_i = (ci_c == cur_cfg.ci - 1'b1) && (kh_c == cur_cfg.kh - 1'b1);
  assign iter_end_i = col_last_i && (w_c == cur_cfg.w - 1'b1) && (nl_c == cur_cfg.nl - 1'b1);
  assign swap      = next_ready && (!cur_valid || (issue && iter_end_i));
  assign swap_evt  = swap;
  assign wait_evt  = !cur_valid && !next_ready;

  always_comb begin
    tag_i           = '0;
    tag_i.col_first = (ci_c == 0) && (kh_c == 0);
    tag_i.col_last  = col_last_i;
    tag_i.w_first   = (w_c == 0);
    tag_i.w_last    = (w_c == cur_cfg.w - 1'b1);
    tag_i.iter_last = iter_end_i;
    tag_i.w_phase   = ph_c;
    tag_i.w_idx     = w_c;
    cfg_i.kw        = cur_cfg.kw;
    cfg_i.sw        = cur_cfg.sw;
  end

  // ---------------- SRAM banks ----------------
  logic [1:0][C-1:0][WK-1:0] rdata;
  for (genvar b = 0; b < 2; b++) begin : g_bank
    logic we, re;
    assign we = wr_fire && (rd_bank != 1'(b));
    assign re = issue   && (rd_bank == 1'(b));
    kraken_sram #(.WB(WK), .C(C), .DEPTH(DEPTH)) u_sram (
      .clk, .en(we || re), .we,
      .addr(we ? wr_addr : base_c + AW'(ph_c)),
      .wdata(a_m_data), .rdata(rdata[b])
    );
  end
  logic rd_bank_p;   // bank the in-flight read came from

  // ---------------- output FIFO (2 entries) ----------------
  typedef struct packed {
    logic [C-1:0][WK-1:0] d;
    ktag_t                tag;
    ecfg_t                cfg;
  } kbeat_t;
  kbeat_t fifo [2];
  logic   wp, rp;

  assign k_valid = (cnt != 0);
  assign k_data  = fifo[rp].d;
  assign k_tag   = fifo[rp].tag;
  assign k_cfg   = fifo[rp].cfg;

  always_ff @(posedge clk)
    if (inflight) fifo[wp] <= '{d: rdata[rd_bank_p], tag: tag_p, cfg: cfg_p};

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      hdr_phase  <= 1'b1;
      filling    <= 1'b0;
      next_ready <= 1'b0;
      next_cfg   <= '0;
      wr_addr    <= '0;
      rd_bank    <= 1'b0;
      cur_valid  <= 1'b0;
      cur_cfg    <= '0;
      ci_c <= '0; kh_c <= '0; w_c <= '0; nl_c <= '0; ph_c <= '0; base_c <= '0;
      inflight   <= 1'b0;
      rd_bank_p  <= 1'b0;
      tag_p      <= '0;
      cfg_p      <= '0;
      cnt        <= '0;
      wp         <= 1'b0;
      rp         <= 1'b0;
    end else begin
      // fill
      if (hdr_take) begin
        next_cfg  <= hdr2cfg(s_data);
        hdr_phase <= 1'b0;
        filling   <= 1'b1;
        wr_addr   <= '0;
      end else if (!hdr_phase && s_valid && s_ready && s_last) begin
        hdr_phase <= 1'b1;
      end
      if (wr_fire) begin
        wr_addr <= wr_addr + 1'b1;
        if (a_m_last) begin
          filling    <= 1'b0;
          next_ready <= 1'b1;
        end
      end
      // rotate
      if (issue) begin
        if (col_last_i) begin
          ci_c <= '0; kh_c <= '0; base_c <= '0;
          if (w_c == cur_cfg.w - 1'b1) begin
            w_c <= '0; ph_c <= '0;
            nl_c <= (nl_c == cur_cfg.nl - 1'b1) ? '0 : nl_c + 1'b1;
          end else begin
            w_c  <= w_c + 1'b1;
            ph_c <= (ph_c == cur_cfg.sw - 1'b1) ? '0 : ph_c + 1'b1;
          end
          if (iter_end_i) cur_valid <= 1'b0;
        end else begin
          base_c <= base_c + AW'(cur_cfg.sw);
          if (kh_c == cur_cfg.kh - 1'b1) begin
            kh_c <= '0;
            ci_c <= ci_c + 1'b1;
          end else begin
            kh_c <= kh_c + 1'b1;
          end
        end
      end
      if (swap) begin
        rd_bank    <= !rd_bank;
        cur_cfg    <= next_cfg;
        cur_valid  <= 1'b1;
        next_ready <= 1'b0;
        ci_c <= '0; kh_c <= '0; w_c <= '0; nl_c <= '0; ph_c <= '0; base_c <= '0;
      end
      // pipeline
      inflight  <= issue;
      rd_bank_p <= rd_bank;
      tag_p     <= tag_i;
      cfg_p     <= cfg_i;
      if (inflight) wp <= !wp;
      if (pop)      rp <= !rp;
      cnt <= cnt + {1'b0, inflight} - {1'b0, pop};
    end

  // a row address must stay inside the bank
  a_depth: assert property (@(posedge clk) disable iff (!rst_n)
                            wr_fire |-> 32'(wr_addr) < DEPTH);
endmodule
