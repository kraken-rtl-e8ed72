// tb_kraken_axis_adapter: sends numbered words through 8->7 (down) and 8->24
// (up) converters with random valid/ready and checks order, beat boundaries,
// m_last placement and partly kept last input beats (TKEEP); the 7-beat
// packet ends in a beat with one padding word, which must not make an extra
// output beat.
module tb_kraken_axis_adapter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- 8 -> 7 ----
  logic s7_valid, s7_ready, s7_last, m7_valid, m7_ready, m7_last;
  logic [7:0][7:0] s7_data;
  logic [7:0] s7_keep, s24_keep;
  logic [6:0][7:0] m7_data;
  kraken_axis_adapter #(.WB(8), .IN_W(8), .OUT_W(7)) u7 (
    .clk, .rst_n, .s_valid(s7_valid), .s_ready(s7_ready), .s_data(s7_data), .s_last(s7_last), .s_keep(s7_keep),
    .m_valid(m7_valid), .m_ready(m7_ready), .m_data(m7_data), .m_last(m7_last));
  // ---- 8 -> 24 ----
  logic s24_valid, s24_ready, s24_last, m24_valid, m24_ready, m24_last;
  logic [7:0][7:0] s24_data;
  logic [23:0][7:0] m24_data;
  kraken_axis_adapter #(.WB(8), .IN_W(8), .OUT_W(24)) u24 (
    .clk, .rst_n, .s_valid(s24_valid), .s_ready(s24_ready), .s_data(s24_data), .s_last(s24_last), .s_keep(s24_keep),
    .m_valid(m24_valid), .m_ready(m24_ready), .m_data(m24_data), .m_last(m24_last));

  // packets: payload of nbeats*OUT words; the last input beat is partly kept
  task automatic send7(int nout, int base);
    int nwords = nout * 7;
    for (int i = 0; i < nwords; i += 8) begin
      s7_valid = 1; s7_last = (i + 8 >= nwords);
      for (int k = 0; k < 8; k++) s7_keep[k] = (i + k < nwords);
      for (int k = 0; k < 8; k++) s7_data[k] = 8'(base + i + k);
      forever begin @(negedge clk); if (s7_ready) break; end
      @(posedge clk); #1 s7_valid = 0;
      if ($urandom_range(0, 2) == 0) begin @(posedge clk); #1; end
    end
  endtask
  task automatic send24(int nout, int base);
    int nwords = nout * 24;
    for (int i = 0; i < nwords; i += 8) begin
      s24_valid = 1; s24_last = (i + 8 >= nwords); s24_keep = '1;
      for (int k = 0; k < 8; k++) s24_data[k] = 8'(base + i + k);
      forever begin @(negedge clk); if (s24_ready) break; end
      @(posedge clk); #1 s24_valid = 0;
      if ($urandom_range(0, 2) == 0) begin @(posedge clk); #1; end
    end
  endtask

  int exp7_word = 0, exp7_beat = 0, pk7 = 0;
  int exp24_word = 0, exp24_beat = 0, pk24 = 0;
  int n7 [4] = '{3, 5, 1, 7};
  int n24 [3] = '{2, 1, 3};
  int base7 [4] = '{0, 40, 100, 120};
  int base24 [3] = '{0, 60, 90};

  always @(posedge clk) if (rst_n) begin
    m7_ready <= $urandom_range(0, 3) != 0;
    m24_ready <= $urandom_range(0, 3) != 0;
    if (m7_valid && m7_ready) begin
      for (int k = 0; k < 7; k++) begin
        checks++;
        if (m7_data[k] != 8'(base7[pk7] + exp7_beat * 7 + k)) begin
          failures++; $display("8->7 pkt %0d beat %0d word %0d: %0d", pk7, exp7_beat, k, m7_data[k]);
        end
      end
      checks++;
      if (m7_last != (exp7_beat == n7[pk7] - 1)) begin failures++; $display("8->7 last wrong"); end
      if (exp7_beat == n7[pk7] - 1) begin exp7_beat = 0; pk7++; end else exp7_beat++;
    end
    if (m24_valid && m24_ready) begin
      for (int k = 0; k < 24; k++) begin
        checks++;
        if (m24_data[k] != 8'(base24[pk24] + exp24_beat * 24 + k)) begin
          failures++; $display("8->24 pkt %0d beat %0d word %0d: %0d", pk24, exp24_beat, k, m24_data[k]);
        end
      end
      checks++;
      if (m24_last != (exp24_beat == n24[pk24] - 1)) begin failures++; $display("8->24 last wrong"); end
      if (exp24_beat == n24[pk24] - 1) begin exp24_beat = 0; pk24++; end else exp24_beat++;
    end
  end

  initial begin
    s7_valid = 0; s24_valid = 0; s7_last = 0; s24_last = 0; m7_ready = 0; m24_ready = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    fork
      for (int p = 0; p < 4; p++) send7(n7[p], base7[p]);
      for (int p = 0; p < 3; p++) send24(n24[p], base24[p]);
    join
    repeat (50) @(posedge clk);
    checks++;
    if (pk7 != 4 || pk24 != 3) begin failures++; $display("packets out: %0d %0d", pk7, pk24); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
