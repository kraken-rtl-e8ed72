// tb_kraken_pe: drives one PE through multiply-accumulate, bypass, shift from
// the left neighbour and hold, comparing with a software accumulator.
module tb_kraken_pe;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en, mul_en;
  logic [1:0] sel;
  logic signed [7:0] x, k;
  logic signed [31:0] acc_left, acc;
  int checks = 0, failures = 0;
  longint model;

  kraken_pe dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input bit e, input bit m, input logic [1:0] s);
    en = e; mul_en = m; sel = s;
    x = 8'($urandom); k = 8'($urandom); acc_left = 32'($urandom_range(0, 100000)) - 50000;
    @(negedge clk);
    if (e) model = (m ? longint'(x) * longint'(k) : 0) +
                   (s == 0 ? model : s == 1 ? longint'(acc_left) : 0);
    checks++;
    if (acc !== 32'(model)) begin
      failures++;
      $display("mismatch en=%0b mul=%0b sel=%0d acc=%0d model=%0d", e, m, s, acc, model);
    end
  endtask

  initial begin
    model = 0;
    @(negedge clk);
    step(1, 1, 2);          // bypass: start new sum
    repeat (20) step(1, 1, 0);
    step(1, 0, 1);          // multiplier paused, take left neighbour
    repeat (5) step(1, 1, 0);
    step(0, 1, 0);          // hold
    step(1, 0, 2);          // clear
    repeat (200) step(1, $urandom_range(0, 1), 2'($urandom_range(0, 2)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
