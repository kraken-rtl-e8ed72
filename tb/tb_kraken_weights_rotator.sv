// tb_kraken_weights_rotator: streams three K^ packets (two layer shapes) into
// an 8-core, 64-row rotator and checks every weight beat's row contents and
// tags against the rotation order computed here, that each iteration is
// rotated N*L*W times, that banks swap once per iteration, that the engine
// waits when no kernel is ready, and that a prefetched iteration with a
// always-ready consumer streams one beat per clock.
module tb_kraken_weights_rotator;
  import kraken_pkg::*;
  localparam int C = 8, DEPTH = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic s_valid, s_ready, s_last, k_valid, k_ready, swap_evt, wait_evt;
  logic [IN_WORDS-1:0][WK-1:0] s_data;
  logic [IN_WORDS-1:0] s_keep;
  logic [C-1:0][WK-1:0] k_data;
  ktag_t k_tag;
  ecfg_t k_cfg;

  kraken_weights_rotator #(.C(C), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, swaps = 0, waits = 0;
  localparam int NI = 3;
  int ci_i [NI] = '{3, 3, 2};
  int kh_i [NI] = '{3, 3, 5};
  int kw_i [NI] = '{3, 3, 5};
  int sw_i [NI] = '{1, 1, 2};
  int w_i  [NI] = '{4, 4, 5};
  int nl_i [NI] = '{2, 2, 1};
  bit full_rate = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] kval(int it, int row, int j);
    return 8'(it * 71 + row * 9 + j * 3 + 5);
  endfunction

  task automatic send_beat(logic [63:0] d, bit last);
    s_valid = 1; s_data = d; s_last = last; s_keep = '1;
    forever begin @(negedge clk); if (s_ready) break; end
    @(posedge clk); #1 s_valid = 0;
  endtask

  task automatic send_iter(int it);
    cfg_t h;
    int rows;
    h = '0; h.kh = 4'(kh_i[it]); h.kw = 4'(kw_i[it]); h.s_h = 3'(1); h.sw = 3'(sw_i[it]);
    h.ci = 12'(ci_i[it]); h.w = 11'(w_i[it]); h.nl = 12'(nl_i[it]);
    send_beat(64'(h), 0);
    rows = ci_i[it] * kh_i[it] * sw_i[it];
    for (int rw = 0; rw < rows; rw++) begin
      logic [63:0] d;
      for (int k = 0; k < 8; k++) d[k*8 +: 8] = kval(it, rw, k);
      send_beat(d, rw == rows - 1);
    end
  endtask

  // expected stream
  int it = 0, nl = 0, w = 0, ci = 0, kh = 0, beats = 0;
  int t_first = 0, t_last = 0;
  always @(posedge clk) if (rst_n) begin
    k_ready <= full_rate || ($urandom_range(0, 3) != 0);
    if (swap_evt) swaps++;
    if (wait_evt) waits++;
    if (k_valid && k_ready) begin
      int row;
      ktag_t e;
      if (beats == 0) t_first = $time;
      t_last = $time;
      beats++;
      row = (ci * kh_i[it] + kh) * sw_i[it] + (w % sw_i[it]);
      for (int j = 0; j < C; j++) begin
        checks++;
        if (k_data[j] != kval(it, row, j)) begin
          failures++;
          $display("iter %0d nl %0d w %0d ci %0d kh %0d core %0d: %0d expected %0d",
                   it, nl, w, ci, kh, j, k_data[j], kval(it, row, j));
        end
      end
      e = '0;
      e.col_first = (ci == 0 && kh == 0);
      e.col_last  = (ci == ci_i[it] - 1 && kh == kh_i[it] - 1);
      e.w_first   = (w == 0);
      e.w_last    = (w == w_i[it] - 1);
      e.iter_last = e.col_last && e.w_last && (nl == nl_i[it] - 1);
      e.w_phase   = SW_BITS'(w % sw_i[it]);
      e.w_idx     = W_BITS'(w);
      checks++;
      if (k_tag != e || k_cfg.kw != KW_BITS'(kw_i[it]) || k_cfg.sw != SW_BITS'(sw_i[it])) begin
        failures++; $display("iter %0d nl %0d w %0d ci %0d kh %0d: tag %h expected %h", it, nl, w, ci, kh, k_tag, e);
      end
      if (kh + 1 < kh_i[it]) kh++;
      else begin
        kh = 0;
        if (ci + 1 < ci_i[it]) ci++;
        else begin
          ci = 0;
          if (w + 1 < w_i[it]) w++;
          else begin
            w = 0;
            if (nl + 1 < nl_i[it]) nl++;
            else begin
              checks++;
              if (beats != nl_i[it] * w_i[it] * ci_i[it] * kh_i[it]) begin
                failures++; $display("iter %0d: %0d beats", it, beats);
              end
              if (it == 1) begin
                checks++;
                if ((t_last - t_first) / 10 + 1 != beats) begin
                  failures++; $display("iter 1: %0d beats in %0d clocks", beats, (t_last - t_first) / 10 + 1);
                end
              end
              nl = 0; it++; beats = 0;
            end
          end
        end
      end
    end
  end

  initial begin
    s_valid = 0; s_last = 0; s_data = '0; s_keep = '1; k_ready = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    repeat (20) @(posedge clk); #1;   // engine waits with nothing loaded
    send_iter(0);
    send_iter(1);                     // prefetched while iteration 0 rotates
    wait (it == 1); full_rate = 1;
    send_iter(2);
    wait (it == 2); full_rate = 0;
    wait (it == 3);
    repeat (10) @(posedge clk);
    checks++;
    if (swaps != NI) begin failures++; $display("%0d swaps", swaps); end
    checks++;
    if (waits == 0) begin failures++; $display("never waited"); end
    $display("swaps=%0d wait clocks=%0d", swaps, waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
