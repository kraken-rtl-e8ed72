// tb_kraken_top: end-to-end test of the Kraken accelerator at its full size
// (7 x 96 array, 2048-row weight banks; no parameter is overridden).
//
// A list of iterations (convolution layers with K = 1, 3, 5, 7 and 11,
// strides 1, 2 and 4, and a fully-connected layer) is turned into X^ and K^
// packets exactly as a DMA would send them: for X^ a header and then, per
// block, column, input channel and vertical phase j, the R + F pixels of rows
// j, j + S_H, ... of the zero-padded image; for K^ a header and the rows
// (c_i, k_h, s_w) of the tiled kernel, k_h in the shifter's tap order, where
// core g of elastic group e holds K[e*S_W + c][c_i][k_h][g - c] with
// c = (g - s_w) mod S_W (zero if g - c is not a tap). Both streams run with
// random gaps and the output with random back-pressure. Every output beat is
// compared with a convolution computed directly from the pixel and weight
// functions, and m_y_last must mark the last beat of each iteration.
//
// Each mechanism of the design is counted and must happen at least once:
// MACs, shift-accumulate clocks, the K_W = 1 bypass, pixel-bank shifts, all
// four shift factors F, bank swaps, waits for a kernel, stalls from the
// output pipe, multi-core releases at the last column, layer (mode)
// switches, strided columns and fully-connected mode. One iteration runs
// without gaps and checks that the engine then takes a beat every clock
// apart from one shift clock per column.
module tb_kraken_top;
  import kraken_pkg::*;
  localparam int R = R_DEF, C = C_DEF;
  localparam int NIT = 9;
  localparam int RATE_IT = 8;                 // the gap-free iteration
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic s_x_valid, s_x_ready, s_x_last, s_k_valid, s_k_ready, s_k_last;
  logic [IN_WORDS-1:0][WX-1:0] s_x_data;
  logic [IN_WORDS-1:0][WK-1:0] s_k_data;
  logic [IN_WORDS-1:0] s_x_keep, s_k_keep;
  logic m_y_valid, m_y_ready, m_y_last;
  logic [R-1:0][WY-1:0] m_y_data;
  logic ev_mac, ev_shift_acc, ev_pix_shift, ev_swap, ev_k_wait, ev_out_stall, ev_multi_out;

  kraken_top dut (.*);

  //              it:  0  1  2  3  4   5  6   7  8
  int kh_i [NIT] = '{  3, 3, 5, 5, 7, 11, 1,  1, 3};
  int sh_i [NIT] = '{  1, 1, 2, 1, 2,  4, 1,  1, 1};
  int ci_i [NIT] = '{  3, 2, 2, 2, 2,  2, 4, 16, 12};
  int w_i  [NIT] = '{  6, 5, 9, 6, 8, 12, 5,  1, 4};
  int nl_i [NIT] = '{  2, 1, 1, 1, 1,  1, 2,  1, 1};

  int checks = 0, failures = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired: macs=%0d swaps=%0d outs=%0d left=%0d", n_mac, n_swap, n_out, exp_q.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- data ----------------
  function automatic int mix(int a, int b, int c, int d, int e);
    int unsigned h;
    h = a * 32'h9E3779B1 ^ b * 32'h85EBCA77 ^ c * 32'hC2B2AE3D ^ d * 32'h27D4EB2F ^ e * 32'h165667B1;
    h ^= h >> 15; h *= 32'h2C1B3C6D; h ^= h >> 12; h *= 32'h297A2D39; h ^= h >> 15;
    return int'(h);
  endfunction

  // pixel (c_i, row, col) of iteration it, zero outside the image
  function automatic int xval(int it, int ci, int row, int col);
    if (row < 0 || row >= nl_i[it] * R * sh_i[it] || col < 0 || col >= w_i[it]) return 0;
    return int'($signed(8'(mix(it, ci, row, col, 1))));
  endfunction

  function automatic int kval(int it, int ch, int ci, int kh, int kw);
    return int'($signed(8'(mix(it, ch, ci, kh * 16 + kw, 2))));
  endfunction

  function automatic int f_of(int it);
    return (kh_i[it] + sh_i[it] - 1) / sh_i[it] - 1;
  endfunction

  // i-th tap in the shifter's order 0, S_H, 2S_H, ..., 1, 1 + S_H, ...
  function automatic int tap_order(int it, int i);
    int n = 0;
    for (int j = 0; j < sh_i[it]; j++)
      for (int t = j; t < kh_i[it]; t += sh_i[it]) begin
        if (n == i) return t;
        n++;
      end
    return -1;
  endfunction

  // ---------------- expected output ----------------
  logic [R-1:0][WY-1:0] exp_q [$];
  bit                   exp_last_q [$];
  int                   beats_it [NIT];       // engine beats per iteration

  task automatic build_expected(int it);
    int kw, sw, G, E, half, pad, nexp;
    kw = kh_i[it]; sw = sh_i[it]; G = kw + sw - 1; E = C / G; half = kw / 2; pad = (kh_i[it] - 1) / 2;
    nexp = 0;
    for (int n = 0; n < nl_i[it]; n++)
      for (int w = 0; w < w_i[it]; w++)
        for (int j = 0; j < E * G; j++) begin
          int g, c, t, ctr;
          logic [R-1:0][WY-1:0] v;
          g = j % G; c = ((g - w) % sw + sw) % sw; t = g - c;
          if (t < 0 || t >= kw) continue;
          if (w - t + half < 0) continue;
          if (!(t == kw - 1 || (w == w_i[it] - 1 && t >= half))) continue;
          ctr = w - t + half;
          for (int r = 0; r < R; r++) begin
            int s = 0;
            for (int ci = 0; ci < ci_i[it]; ci++)
              for (int kh = 0; kh < kh_i[it]; kh++)
                for (int k = 0; k < kw; k++)
                  s += xval(it, ci, n * R * sh_i[it] + r * sh_i[it] + kh - pad, ctr - half + k)
                     * kval(it, (j / G) * sw + c, ci, kh, k);
            v[r] = WY'(s);
          end
          exp_q.push_back(v);
          exp_last_q.push_back(0);
          nexp++;
        end
    if (nexp > 0) exp_last_q[$] = 1;
    beats_it[it] = nl_i[it] * w_i[it] * ci_i[it] * kh_i[it];
  endtask

  // ---------------- stream drivers ----------------
  bit gap_free = 0;
  bit k_sent [NIT];

  task automatic send_x(logic [63:0] d, bit last, logic [7:0] keep);
    #1;
    s_x_valid = 1; s_x_data = d; s_x_last = last; s_x_keep = keep;
    forever begin @(negedge clk); if (s_x_ready) break; end
    @(posedge clk); #1 s_x_valid = 0;
    if (!gap_free) while ($urandom_range(0, 5) == 0) @(posedge clk);
  endtask

  task automatic send_k(logic [63:0] d, bit last);
    #1;
    s_k_valid = 1; s_k_data = d; s_k_last = last; s_k_keep = '1;
    forever begin @(negedge clk); if (s_k_ready) break; end
    @(posedge clk); #1 s_k_valid = 0;
    if (!gap_free) while ($urandom_range(0, 5) == 0) @(posedge clk);
  endtask

  function automatic cfg_t header(int it);
    cfg_t h;
    h = '0;
    h.kh = KW_BITS'(kh_i[it]); h.kw = KW_BITS'(kh_i[it]);
    h.s_h = SW_BITS'(sh_i[it]); h.sw = SW_BITS'(sh_i[it]);
    h.ci = CI_BITS'(ci_i[it]); h.f = F_BITS'(f_of(it));
    h.w = W_BITS'(w_i[it]); h.nl = NL_BITS'(nl_i[it]);
    return h;
  endfunction

  task automatic send_x_iter(int it);
    int f, pad, nw, q;
    logic [7:0] words [$];
    f = f_of(it); pad = (kh_i[it] - 1) / 2;
    send_x(64'(header(it)), 0, 8'hFF);
    for (int n = 0; n < nl_i[it]; n++)
      for (int w = 0; w < w_i[it]; w++)
        for (int ci = 0; ci < ci_i[it]; ci++)
          for (int j = 0; j < sh_i[it]; j++)
            for (int i = 0; i < R + f; i++)
              words.push_back(8'(xval(it, ci, n * R * sh_i[it] + i * sh_i[it] + j - pad, w)));
    nw = words.size();
    while (words.size() % 8 != 0) words.push_back(8'h00);
    q = 0;
    while (q < nw) begin
      logic [63:0] d;
      for (int k = 0; k < 8; k++) d[k*8 +: 8] = words[q + k];
      send_x(d, q + 8 >= nw, 8'((16'h1 << ((nw - q) > 8 ? 8 : nw - q)) - 1));
      q += 8;
    end
  endtask

  // weight of core j in row (c_i, tap index i, phase p)
  function automatic logic [7:0] kword(int it, int ci, int i, int p, int j);
    int kw, sw, G, E, g, c, t;
    kw = kh_i[it]; sw = sh_i[it]; G = kw + sw - 1; E = C / G;
    if (j >= E * G) return 0;
    g = j % G; c = ((g - p) % sw + sw) % sw; t = g - c;
    if (t < 0 || t >= kw) return 0;
    return 8'(kval(it, (j / G) * sw + c, ci, tap_order(it, i), t));
  endfunction

  task automatic send_k_iter(int it);
    int rows, nbeats;
    send_k(64'(header(it)), 0);
    rows = ci_i[it] * kh_i[it] * sh_i[it];
    nbeats = C / 8;
    for (int rw = 0; rw < rows; rw++) begin
      int ci, i, p;
      p = rw % sh_i[it]; i = (rw / sh_i[it]) % kh_i[it]; ci = rw / (sh_i[it] * kh_i[it]);
      for (int b = 0; b < nbeats; b++) begin
        logic [63:0] d;
        for (int k = 0; k < 8; k++) d[k*8 +: 8] = kword(it, ci, i, p, b * 8 + k);
        send_k(d, rw == rows - 1 && b == nbeats - 1);
      end
    end
    k_sent[it] = 1;
  endtask

  // ---------------- monitors ----------------
  int n_mac = 0, n_shift = 0, n_bypass = 0, n_pix = 0, n_swap = 0, n_wait = 0;
  int n_stall = 0, n_multi = 0, n_mode = 0, n_stride = 0, n_fc = 0, n_out = 0, n_ydrop = 0;
  bit f_seen [8];
  int rate_first = -1, rate_last = -1, cyc = 0, rate_shifts = 0, mac_before_rate;
  int prev_kw = -1;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (ev_mac) begin
      n_mac++;
      if (dut.u_engine.k_tag.col_first && dut.u_engine.k_cfg.kw == 1) n_bypass++;
      if (dut.u_engine.k_tag.col_first && dut.u_engine.k_cfg.sw > 1) n_stride++;
      if (dut.u_engine.k_tag.col_first && 32'(dut.u_engine.k_cfg.kw) != prev_kw) begin
        if (prev_kw != -1) n_mode++;
        prev_kw = 32'(dut.u_engine.k_cfg.kw);
      end
      f_seen[dut.u_shifter.cfg.f] = 1;
      if (n_mac - 1 == mac_before_rate) rate_first = cyc;
      if (n_mac == mac_before_rate + beats_it[RATE_IT]) rate_last = cyc;
    end
    if (ev_shift_acc) begin
      n_shift++;
      if (n_mac >= mac_before_rate && n_mac < mac_before_rate + beats_it[RATE_IT]) rate_shifts++;
    end
    if (ev_pix_shift) n_pix++;
    if (ev_swap) n_swap++;
    if (ev_k_wait) n_wait++;
    if (ev_out_stall) n_stall++;
    if (ev_multi_out) n_multi++;
    if (m_y_valid && !m_y_ready) n_ydrop++;
    if (m_y_valid && m_y_ready) begin
      logic [R-1:0][WY-1:0] e;
      bit el;
      checks++;
      n_out++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("unexpected output beat %h", m_y_data);
      end else begin
        e = exp_q.pop_front(); el = exp_last_q.pop_front();
        if (e != m_y_data || el != m_y_last) begin
          failures++;
          if (failures < 10)
            $display("output %0d: got %h last %0d, expected %h last %0d",
                     n_out, m_y_data, m_y_last, e, el);
        end
      end
    end
  end

  always @(posedge clk) m_y_ready <= gap_free ? 1'b1 : ($urandom_range(0, 3) != 0);

  task automatic require(string what, bit ok, int count);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (count %0d)", what, count); end
    else $display("%-32s %0d", what, count);
  endtask

  initial begin
    s_x_valid = 0; s_k_valid = 0; s_x_data = '0; s_k_data = '0;
    s_x_last = 0; s_k_last = 0; s_x_keep = '0; s_k_keep = '0;
    for (int it = 0; it < NIT; it++) build_expected(it);
    mac_before_rate = 0;
    for (int it = 0; it < RATE_IT; it++) mac_before_rate += beats_it[it];
    n_fc = 0;
    for (int it = 0; it < NIT; it++) if (w_i[it] == 1 && kh_i[it] == 1) n_fc++;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    fork
      for (int it = 0; it < NIT; it++) send_k_iter(it);
      for (int it = 0; it < NIT; it++) begin
        if (it == RATE_IT) begin
          // let the kernel of the gap-free iteration arrive first
          while (!k_sent[it]) @(posedge clk);
          gap_free = 1;
        end
        send_x_iter(it);
      end
    join
    while (exp_q.size() != 0 && cyc < 390000) @(posedge clk);
    repeat (20) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d output beats never came", exp_q.size()); end
    require("MACs", n_mac == mac_before_rate + beats_it[RATE_IT], n_mac);
    require("shift-accumulate clocks", n_shift > 0, n_shift);
    require("K_W = 1 bypass columns", n_bypass > 0, n_bypass);
    require("pixel-bank shifts", n_pix > 0, n_pix);
    require("shift factor F = 0 used", f_seen[0], 0);
    require("shift factor F = 2 used", f_seen[2], 2);
    require("shift factor F = 3 used", f_seen[3], 3);
    require("shift factor F = 4 used", f_seen[4], 4);
    require("weight bank swaps", n_swap == NIT, n_swap);
    require("waits for a kernel", n_wait > 0, n_wait);
    require("stalls from the output pipe", n_stall > 0, n_stall);
    require("output back-pressure clocks", n_ydrop > 0, n_ydrop);
    require("multi-core releases", n_multi > 0, n_multi);
    require("layer (mode) switches", n_mode > 0, n_mode);
    require("strided (S_W > 1) columns", n_stride > 0, n_stride);
    require("fully-connected iterations", n_fc > 0, n_fc);
    // gap-free iteration: one beat per clock plus one shift clock per column
    // (the first column's shift clock comes before the first MAC)
    require("gap-free iteration clocks", rate_first >= 0 &&
            rate_last - rate_first + 1 == beats_it[RATE_IT] + w_i[RATE_IT] * nl_i[RATE_IT] - 1,
            rate_last - rate_first + 1);
    $display("gap-free iteration: %0d MACs in %0d clocks, %0d shift clocks",
             beats_it[RATE_IT], rate_last - rate_first + 1, rate_shifts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
