// kraken_sram: one weight buffer bank of the weights rotator, written as an
// array: DEPTH rows of C words, single port, synchronous write and
// synchronous read with one clock of latency (the latency the rotator's
// register pipeline hides). In silicon this is a compiled SRAM macro (the
// paper used 2048 x 96-byte banks from a memory compiler); this model has the
// same function and port, and its read-during-write and power pins are not
// modelled.
module kraken_sram #(
  parameter int unsigned WB    = 8,
  parameter int unsigned C     = 96,
  parameter int unsigned DEPTH = 2048
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [C-1:0][WB-1:0]     wdata,
  output logic [C-1:0][WB-1:0]     rdata
);
  logic [C-1:0][WB-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
endmodule
