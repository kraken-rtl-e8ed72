// tb_kraken_eg_map: checks G, E, core positions and idle cores against
// integer division for every (K_W, S_W) pair of the benchmark networks and
// for random ones.
module tb_kraken_eg_map;
  import kraken_pkg::*;
  localparam int unsigned C = 96;
  logic [KW_BITS-1:0] kw;
  logic [SW_BITS-1:0] sw;
  logic [5:0] g_size;
  logic [$clog2(C+1)-1:0] e_num;
  logic [C-1:0][5:0] g_pos;
  logic [C-1:0] g_first, active;
  int checks = 0, failures = 0;

  kraken_eg_map #(.C(C)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(input int k, input int s);
    int g, e;
    kw = KW_BITS'(k); sw = SW_BITS'(s);
    #1;
    g = k + s - 1; e = C / g;
    checks++;
    if (g_size != g || e_num != e) begin
      failures++;
      $display("K_W=%0d S_W=%0d: G=%0d E=%0d expected %0d %0d", k, s, g_size, e_num, g, e);
    end
    for (int j = 0; j < C; j++) begin
      checks++;
      if (g_pos[j] != j % g || g_first[j] != (j % g == 0) || active[j] != (j < e * g)) begin
        failures++;
        $display("K_W=%0d S_W=%0d core %0d: g=%0d first=%0b active=%0b", k, s, j, g_pos[j], g_first[j], active[j]);
      end
    end
  endtask

  initial begin
    check_one(11, 4); check_one(5, 1); check_one(3, 1); check_one(7, 2);
    check_one(1, 1);  check_one(3, 2); check_one(1, 2);
    repeat (30) check_one($urandom_range(1, 15), $urandom_range(1, 7));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
