// kraken_axis_adapter: AXI-Stream data-width converter between a stream of
// IN_W words per beat and one of OUT_W words per beat (any ratio, up or down).
//
// Words are kept in order in a small buffer of IN_W + OUT_W words. An input
// beat is taken while at most OUT_W words are buffered; an output beat is
// offered whenever OUT_W words are buffered. The end of a packet (s_last) is
// marked on the output beat that takes its final full OUT_W words. s_keep
// marks the valid words of an input beat (AXI-Stream TKEEP at word grain; the
// valid words must be the low ones), so the last DRAM beat of a packet may be
// partly filled. Fewer than OUT_W words left at the end of a packet are
// dropped, so a packet should carry a whole number of output beats. No new packet is
// taken until the old one has left. The paper only names these adapters
// (datawidth converters from the DRAM bus to R+F or C words); their insides
// are this design's.
module kraken_axis_adapter #(
  parameter int unsigned WB    = 8,   // bits per word
  parameter int unsigned IN_W  = 8,   // words per input beat
  parameter int unsigned OUT_W = 7    // words per output beat
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       s_valid,
  output logic                       s_ready,
  input  logic [IN_W-1:0][WB-1:0]    s_data,
  input  logic                       s_last,
  input  logic [IN_W-1:0]            s_keep,
  output logic                       m_valid,
  input  logic                       m_ready,
  output logic [OUT_W-1:0][WB-1:0]   m_data,
  output logic                       m_last
);
  localparam int unsigned CAP = IN_W + OUT_W;
  localparam int unsigned CW  = $clog2(CAP + 1);

  logic [CAP-1:0][WB-1:0] buf_q, buf_d;
  logic [CW-1:0]          cnt_q, cnt_d;
  logic                   end_q, end_d;   // buffer holds the end of a packet
  logic                   pop, push;
  logic [CW-1:0]          after_pop;
  logic [CW-1:0]          n_keep;

  assign m_valid = (cnt_q >= CW'(OUT_W));
  assign m_last  = end_q && (32'(cnt_q) < 2 * OUT_W);
  assign s_ready = !end_q && (cnt_q <= CW'(OUT_W));
  assign pop     = m_valid && m_ready;
  assign push    = s_valid && s_ready;

  always_comb
    for (int unsigned i = 0; i < OUT_W; i++) m_data[i] = buf_q[i];

  always_comb begin
    buf_d     = buf_q;
    after_pop = pop ? cnt_q - CW'(OUT_W) : cnt_q;
    if (pop)
      for (int unsigned i = 0; i < CAP; i++)
        buf_d[i] = (i + OUT_W < CAP) ? buf_q[i + OUT_W] : '0;
    n_keep = '0;
    for (int unsigned i = 0; i < IN_W; i++) n_keep = n_keep + CW'(s_keep[i]);
    cnt_d = after_pop;
    end_d = end_q;
    if (push) begin
      for (int unsigned i = 0; i < IN_W; i++)
        buf_d[32'(after_pop) + i] = s_data[i];
      cnt_d = after_pop + n_keep;
      end_d = s_last;
    end
    // drop the padding behind the last whole output beat
    if (end_d && cnt_d < CW'(OUT_W)) begin
      cnt_d = '0;
      end_d = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      cnt_q <= '0;
      end_q <= 1'b0;
    end else begin
      cnt_q <= cnt_d;
      end_q <= end_d;
    end

  always_ff @(posedge clk) buf_q <= buf_d;

endmodule
