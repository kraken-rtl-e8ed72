// tb_kraken_output_pipe: drives column copies of random accumulators into a
// 2 x 16 output pipe for several layer shapes and checks that exactly the
// cores holding full output sums come out, lowest core first, with m_last on
// the last beat of each iteration. The expected set of cores is worked out
// from the K^ tiling rule (core g of a group: channel (g - w) mod S_W, tap
// g - channel) and the zero-padding rule, independently of the design.
// Counts back-pressure stalls and last-column multi-core releases.
module tb_kraken_output_pipe;
  import kraken_pkg::*;
  localparam int R = 2, C = 16, W = 6, NBLK = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic snap_valid, snap_ready, m_valid, m_ready, m_last, multi_evt;
  logic [C-1:0][R-1:0][WY-1:0] snap_acc;
  ktag_t snap_tag;
  ecfg_t snap_cfg;
  logic [R-1:0][WY-1:0] m_data;

  kraken_output_pipe #(.R(R), .C(C)) dut (.*);

  int checks = 0, failures = 0, stalls = 0, multis = 0;
  logic [R-1:0][WY-1:0] exp_q [$];
  logic                 exp_last_q [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit is_full(int kw, int sw, int j, int w, bit wlast);
    int G, E, g, c, t;
    G = kw + sw - 1; E = C / G;
    if (j >= E * G) return 0;
    g = j % G;
    c = ((g - w) % sw + sw) % sw;
    t = g - c;
    if (t < 0 || t >= kw) return 0;
    if (w - t + kw / 2 < 0) return 0;          // centre left of the image
    return (t == kw - 1) || (wlast && t >= kw / 2);
  endfunction

  task automatic run_layer(int kw, int sw);
    for (int n = 0; n < NBLK; n++)
      for (int w = 0; w < W; w++) begin
        logic [C-1:0][R-1:0][WY-1:0] a;
        int last_j;
        foreach (a[j, r]) a[j][r] = $urandom;
        last_j = -1;
        for (int j = 0; j < C; j++) if (is_full(kw, sw, j, w, w == W - 1)) last_j = j;
        for (int j = 0; j < C; j++)
          if (is_full(kw, sw, j, w, w == W - 1)) begin
            exp_q.push_back(a[j]);
            exp_last_q.push_back(n == NBLK - 1 && w == W - 1 && j == last_j);
          end
        // the engine only offers a copy while the capture bank is free
        forever begin
          @(negedge clk);
          if (snap_ready) break;
          stalls++;
        end
        snap_valid = 1; snap_acc = a;
        snap_cfg = '{kw: KW_BITS'(kw), sw: SW_BITS'(sw)};
        snap_tag = '0;
        snap_tag.w_first = (w == 0); snap_tag.w_last = (w == W - 1);
        snap_tag.iter_last = (n == NBLK - 1 && w == W - 1);
        snap_tag.w_phase = SW_BITS'(w % sw); snap_tag.w_idx = W_BITS'(w);
        @(posedge clk);
        #1 snap_valid = 0;
        repeat ($urandom_range(0, 2)) @(posedge clk);
      end
  endtask

  always @(posedge clk) begin
    if (rst_n && multi_evt) multis++;
    if (rst_n && m_valid && m_ready) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected output beat");
      end else begin
        logic [R-1:0][WY-1:0] e;
        logic el;
        e = exp_q.pop_front(); el = exp_last_q.pop_front();
        if (e != m_data || el != m_last) begin
          failures++;
          $display("beat mismatch: got %h last %0d, expected %h last %0d", m_data, m_last, e, el);
        end
      end
    end
    m_ready <= ($urandom_range(0, 3) != 0);
  end

  initial begin
    snap_valid = 0; snap_acc = '0; snap_tag = '0; snap_cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_layer(3, 1);
    run_layer(5, 2);
    run_layer(1, 1);
    run_layer(3, 2);
    run_layer(11, 4);
    run_layer(7, 1);
    repeat (200) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d beats never came out", exp_q.size()); end
    checks++;
    if (stalls == 0) begin failures++; $display("back-pressure never held a column copy"); end
    checks++;
    if (multis == 0) begin failures++; $display("no multi-core release at a last column"); end
    $display("stalls=%0d multi releases=%0d", stalls, multis);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
