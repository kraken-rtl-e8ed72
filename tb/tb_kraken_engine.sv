// tb_kraken_engine: streams pixel and weight beats for small layers through a
// 2 x 8 engine and checks, at every column end, each accumulator that holds a
// sum over whole taps against a directly computed 1-D convolution.
// Covers S_W = 1 and 2, K_W = 3 (shift clock) and K_W = 1 (bypass),
// back-pressure from the output side, and block restarts (w = 0 clears).
module tb_kraken_engine;
  import kraken_pkg::*;
  localparam int R = 2, C = 8, W = 5, B = 3, NBLK = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic x_valid, x_ready, k_valid, k_ready, snap_valid, snap_ready, mac_fire, shift_fire;
  logic [R-1:0][WX-1:0] x_data;
  logic [C-1:0][WK-1:0] k_data;
  ktag_t k_tag, snap_tag;
  ecfg_t k_cfg, snap_cfg;
  logic [C-1:0][R-1:0][WY-1:0] snap_acc;

  kraken_engine #(.R(R), .C(C)) dut (.*);

  int checks = 0, failures = 0, shifts = 0, stalls = 0;
  int kw_cur, sw_cur;
  logic signed [7:0] xv [NBLK][W][B][R];
  logic signed [7:0] kv [4][4][B];           // [channel][tap][beat]

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // weight of core j at column phase p and beat b (the K^ tiling)
  function automatic logic signed [7:0] kword(int j, int p, int b);
    int g, c, t, G, E;
    G = kw_cur + sw_cur - 1; E = C / G;
    if (j >= E * G) return 0;
    g = j % G;
    c = ((g - p) % sw_cur + sw_cur) % sw_cur;
    t = g - c;
    if (t < 0 || t >= kw_cur) return 0;
    return kv[c + 2 * (j / G)][t][b];
  endfunction

  // expected accumulator of core j, row r after column w of block n
  function automatic longint expect_acc(int n, int w, int j, int r);
    int g, c, t, G;
    longint s;
    G = kw_cur + sw_cur - 1;
    g = j % G;
    c = ((g - (w % sw_cur)) % sw_cur + sw_cur) % sw_cur;
    t = g - c;
    s = 0;
    for (int i = 0; i <= t && i <= w && i <= g; i++)
      for (int b = 0; b < B; b++)
        s += longint'(xv[n][w - i][b][r]) * longint'(kword(j - i, (w - i) % sw_cur, b));
    return s;
  endfunction

  task automatic run_layer(int kw, int sw);
    kw_cur = kw; sw_cur = sw;
    foreach (xv[n, w, b, r]) xv[n][w][b][r] = 8'($urandom);
    foreach (kv[c, t, b]) kv[c][t][b] = 8'($urandom);
    for (int n = 0; n < NBLK; n++)
      for (int w = 0; w < W; w++)
        for (int b = 0; b < B; b++) begin
          while ($urandom_range(0, 3) == 0) @(posedge clk);
          #1;
          x_valid = 1; k_valid = 1;
          for (int r = 0; r < R; r++) x_data[r] = xv[n][w][b][r];
          for (int j = 0; j < C; j++) k_data[j] = kword(j, w % sw, b);
          k_cfg = '{kw: KW_BITS'(kw), sw: SW_BITS'(sw)};
          k_tag = '0;
          k_tag.col_first = (b == 0); k_tag.col_last = (b == B - 1);
          k_tag.w_first = (w == 0);   k_tag.w_last = (w == W - 1);
          k_tag.w_phase = SW_BITS'(w % sw); k_tag.w_idx = W_BITS'(w);
          forever begin
            @(negedge clk);
            if (x_ready && k_ready) break;
          end
          @(posedge clk);
          #1 x_valid = 0; k_valid = 0;
        end
  endtask

  // monitor: check every column copy
  int col_n = 0, col_w = 0;
  always @(posedge clk) begin
    if (shift_fire) shifts++;
    if (x_valid && k_valid && k_tag.col_last && !snap_ready) stalls++;
    if (snap_valid && rst_n) begin
      for (int j = 0; j < C; j++) begin
        int G, g, c, t;
        G = kw_cur + sw_cur - 1; g = j % G;
        c = ((g - (col_w % sw_cur)) % sw_cur + sw_cur) % sw_cur; t = g - c;
        if (j < (C / G) * G && t >= 0 && t < kw_cur)
          for (int r = 0; r < R; r++) begin
            checks++;
            if ($signed(snap_acc[j][r]) != 32'(expect_acc(col_n, col_w, j, r))) begin
              failures++;
              $display("K_W=%0d S_W=%0d blk %0d col %0d core %0d row %0d: %0d expected %0d",
                       kw_cur, sw_cur, col_n, col_w, j, r, $signed(snap_acc[j][r]),
                       expect_acc(col_n, col_w, j, r));
            end
          end
      end
      if (col_w == W - 1) begin col_w = 0; col_n = (col_n + 1) % NBLK; end
      else col_w++;
    end
  end

  // output side: after taking a copy it is busy for a random time
  int busy = 0;
  always @(posedge clk) begin
    if (snap_valid) busy = $urandom_range(0, 8);
    else if (busy > 0) busy--;
    snap_ready <= (busy == 0) && !snap_valid;
  end

  initial begin
    x_valid = 0; k_valid = 0; k_tag = '0; k_cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_layer(3, 1);
    repeat (5) @(posedge clk);
    run_layer(3, 2);
    repeat (5) @(posedge clk);
    run_layer(1, 1);
    repeat (5) @(posedge clk);
    checks++;
    if (shifts != 2 * NBLK * W) begin
      failures++;
      $display("shift clocks %0d expected %0d", shifts, 2 * NBLK * W);
    end
    checks++;
    if (stalls == 0) begin failures++; $display("back-pressure never stalled the engine"); end
    $display("shift clocks=%0d back-pressure stalls=%0d", shifts, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
