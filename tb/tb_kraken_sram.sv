// tb_kraken_sram: writes random rows at random addresses of a 64 x 4-word
// bank, reads them back and checks data and the one-clock read latency.
module tb_kraken_sram;
  localparam int C = 4, DEPTH = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en, we;
  logic [5:0] addr;
  logic [C-1:0][7:0] wdata, rdata;
  logic [C-1:0][7:0] model [DEPTH];
  bit written [DEPTH];
  int checks = 0, failures = 0;

  kraken_sram #(.WB(8), .C(C), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0;
    @(negedge clk);
    repeat (2000) begin
      en = 1;
      addr = 6'($urandom);
      we = $urandom_range(0, 1);
      wdata = {$urandom, $urandom};
      @(posedge clk);
      #1;
      if (we) begin
        model[addr] = wdata; written[addr] = 1;
      end else if (written[addr]) begin
        checks++;
        if (rdata != model[addr]) begin
          failures++; $display("addr %0d: %h expected %h", addr, rdata, model[addr]);
        end
      end
      // rdata holds while the bank is idle
      if (!we && written[addr]) begin
        en = 0; @(posedge clk); #1;
        checks++;
        if (rdata != model[addr]) begin failures++; $display("rdata did not hold"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
