// tb_kraken_pixel_shifter: streams X^ packets (header + interleaved rows) for
// several (K_H, S_H) layers back to back, including the R=4, K_H=7, S_H=2
// example of the paper's Table II, and checks that row r of every clock holds
// input row r*S_H + k_h with k_h in the shifter's tap order, that K_H beats are
// produced per input channel, and that a layer with no stalls on either side
// yields one beat per clock.
module tb_kraken_pixel_shifter;
  import kraken_pkg::*;
  localparam int R = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic s_valid, s_ready, s_last, x_valid, x_ready, shift_evt;
  logic [IN_WORDS-1:0][WX-1:0] s_data;
  logic [IN_WORDS-1:0] s_keep;
  logic [R-1:0][WX-1:0] x_data;
  cfg_t cfg;

  kraken_pixel_shifter #(.R(R)) dut (.*);

  int checks = 0, failures = 0, shifts = 0;
  localparam int NL = 6;
  int kh_l [NL] = '{7, 3, 11, 1, 5, 7};
  int sh_l [NL] = '{2, 1, 4, 1, 1, 2};
  int ci_l [NL] = '{2, 3, 2, 4, 2, 3};
  bit stall_l [NL] = '{1, 1, 1, 1, 1, 0};
  bit stall_now = 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] pix(int layer, int row, int ci);
    return 8'(row * 7 + ci * 31 + layer * 5 + 1);
  endfunction

  task automatic send_beat(logic [63:0] d, bit last, logic [7:0] keep);
    s_valid = 1; s_data = d; s_last = last; s_keep = keep;
    forever begin @(negedge clk); if (s_ready) break; end
    @(posedge clk); #1 s_valid = 0;
    if (stall_now && $urandom_range(0, 3) == 0) begin @(posedge clk); #1; end
  endtask

  task automatic send_layer(int l);
    cfg_t h;
    int f, nw, q;
    logic [7:0] words [$];
    f = (kh_l[l] + sh_l[l] - 1) / sh_l[l] - 1;
    h = '0; h.kh = 4'(kh_l[l]); h.kw = 4'(kh_l[l]); h.s_h = 3'(sh_l[l]); h.sw = 3'(1);
    h.ci = 12'(ci_l[l]); h.f = 3'(f); h.w = 11'(1); h.nl = 12'(1);
    send_beat(64'(h), 0, 8'hFF);
    for (int ci = 0; ci < ci_l[l]; ci++)
      for (int j = 0; j < sh_l[l]; j++)
        for (int i = 0; i < R + f; i++) words.push_back(pix(l, i * sh_l[l] + j, ci));
    nw = words.size();
    while (words.size() % 8 != 0) words.push_back(8'hEE);
    q = 0;
    while (q < nw) begin
      logic [63:0] d;
      for (int k = 0; k < 8; k++) d[k*8 +: 8] = words[q + k];
      send_beat(d, q + 8 >= nw, 8'((16'h1 << ((nw - q) > 8 ? 8 : nw - q)) - 1));
      q += 8;
    end
  endtask

  // expected beat stream
  int exp_l = 0, exp_ci = 0, exp_j = 0, exp_m = 0, beats_l = 0;
  int first_t = 0, last_t = 0;
  always @(posedge clk) if (rst_n) begin
    x_ready <= !stall_now || ($urandom_range(0, 4) != 0);
    if (shift_evt) shifts++;
    if (x_valid && x_ready) begin
      int kh;
      kh = exp_j + exp_m * sh_l[exp_l];
      if (beats_l == 0) first_t = $time;
      last_t = $time;
      for (int r = 0; r < R; r++) begin
        checks++;
        if (x_data[r] != pix(exp_l, r * sh_l[exp_l] + kh, exp_ci)) begin
          failures++;
          $display("layer %0d ci %0d kh %0d row %0d: %0d expected %0d", exp_l, exp_ci, kh, r,
                   x_data[r], pix(exp_l, r * sh_l[exp_l] + kh, exp_ci));
        end
      end
      beats_l++;
      if (kh + sh_l[exp_l] < kh_l[exp_l]) exp_m++;
      else begin
        exp_m = 0;
        if (exp_j + 1 < sh_l[exp_l]) exp_j++;
        else begin
          exp_j = 0;
          if (exp_ci + 1 < ci_l[exp_l]) exp_ci++;
          else begin
            checks++;
            if (beats_l != ci_l[exp_l] * kh_l[exp_l]) begin
              failures++; $display("layer %0d: %0d beats", exp_l, beats_l);
            end
            if (!stall_l[exp_l]) begin
              checks++;
              if ((last_t - first_t) / 10 + 1 != beats_l) begin
                failures++; $display("layer %0d: %0d beats took %0d clocks", exp_l, beats_l, (last_t - first_t) / 10 + 1);
              end
            end
            exp_ci = 0; exp_l++; beats_l = 0;
          end
        end
      end
    end
  end

  initial begin
    s_valid = 0; s_last = 0; s_data = '0; x_ready = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    for (int l = 0; l < NL; l++) begin
      stall_now = stall_l[l];
      if (!stall_l[l]) wait (exp_l == l);
      send_layer(l);
    end
    repeat (100) @(posedge clk);
    checks++;
    if (exp_l != NL) begin failures++; $display("only %0d layers came out", exp_l); end
    checks++;
    if (shifts == 0) begin failures++; $display("no shifts"); end
    $display("shift clocks=%0d", shifts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
