// kraken_pe: one Kraken processing element.
//
// The PE is only a multiplier, an accumulator with a bypass, and a 2-way
// multiplexer, as the paper prescribes. On an enabled clock the accumulator
// loads   product + addend,   where the product is x*k when mul_en is high
// (zero while the multipliers pause) and the addend is chosen by sel:
//   SEL_OWN  - its own accumulator (normal multiply-accumulate),
//   SEL_LEFT - the accumulator of the PE in the same row of the core on the
//              left (shift-accumulate of horizontal convolution),
//   SEL_ZERO - nothing (bypass: start a new sum, or clear at a group edge).
// The multiplier has zero latency, as in the paper's implementation. Operands
// are signed two's complement; that, and the accumulator width, are this
// design's choices. No reset: every sum starts with a SEL_ZERO clock.
module kraken_pe
  import kraken_pkg::*;
#(
  parameter int unsigned WXP = WX,
  parameter int unsigned WKP = WK,
  parameter int unsigned WYP = WY
) (
  input  logic                  clk,
  input  logic                  en,       // clock enable of the accumulator
  input  logic                  mul_en,   // product enters the sum
  input  logic [1:0]            sel,      // addend select, see SEL_* below
  input  logic signed [WXP-1:0] x,
  input  logic signed [WKP-1:0] k,
  input  logic signed [WYP-1:0] acc_left, // accumulator of the left neighbour
  output logic signed [WYP-1:0] acc
);
  localparam logic [1:0] SEL_OWN  = 2'd0;
  localparam logic [1:0] SEL_LEFT = 2'd1;

  logic signed [WXP+WKP-1:0] prod;
  logic signed [WYP-1:0]     addend;

  always_comb begin
    if (mul_en) prod = x * k;
    else        prod = '0;
    unique case (sel)
      SEL_OWN:  addend = acc;
      SEL_LEFT: addend = acc_left;
      default:  addend = '0;
    endcase
  end

  always_ff @(posedge clk)
    if (en) acc <= addend + WYP'(prod);

endmodule
