// kraken_eg_map: elastic grouping of the C cores for one layer.
//
// From the kernel width K_W and horizontal stride S_W of a layer it forms
// G = K_W + S_W - 1 cores per elastic group and E = floor(C / G) groups
// (paper eqs. 7-8), and gives every core j its position g = j mod G inside
// its group, a flag for the first core of a group (where the shift multiplexer
// must not take the left neighbour's sum) and a flag for the C mod G idle
// cores at the right end. Positions are found by a counter chain that wraps at
// G, so no divider is needed; that realisation is this design's choice.
// Purely combinational.
module kraken_eg_map
  import kraken_pkg::*;
#(
  parameter int unsigned C = C_DEF
) (
  input  logic [KW_BITS-1:0]        kw,
  input  logic [SW_BITS-1:0]        sw,
  output logic [5:0]                g_size,          // G
  output logic [$clog2(C+1)-1:0]    e_num,           // E
  output logic [C-1:0][5:0]         g_pos,           // g of each core
  output logic [C-1:0]              g_first,         // g == 0
  output logic [C-1:0]              active           // core belongs to a group
);
  logic [$clog2(C+1)-1:0] grp;
  logic [5:0]             gp;

  always_comb begin
    g_size = 6'(kw) + 6'(sw) - 6'd1;
    if (g_size == 0) g_size = 6'd1;       // guards an all-zero header
    grp = '0;
    gp  = '0;
    for (int unsigned j = 0; j < C; j++) begin
      g_pos[j]   = gp;
      g_first[j] = (gp == 0);
      // a group is complete when its last core is reached
      if (gp == g_size - 1) begin
        grp = grp + 1'b1;
        gp  = '0;
      end else begin
        gp  = gp + 6'd1;
      end
    end
    e_num = grp;
    // cores after the last complete group are idle
    for (int unsigned j = 0; j < C; j++)
      active[j] = (j < 32'(e_num) * 32'(g_size));
  end
endmodule
