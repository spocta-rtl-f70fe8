// gather_unit: exploits the zeros of the ifmap. For one 16-channel feature word it keeps
// only the channels whose mask bit is set and, with them, the matching weight columns
// w[:,m] of the 16x16 tile; the kept (feature, column) pairs are packed to the low
// positions in channel order and the rest are zeroed. out_cnt says how many pairs are
// kept; the Data Buffer rectifier then spreads them over its 16 FIFOs. Purely
// combinational. The function is the paper's; the compaction circuit is the simplest one.
module gather_unit
  import spocta_pkg::*;
(
  input  logic                               in_valid,
  input  logic [LANES-1:0][DW-1:0]           x,
  input  logic [LANES-1:0]                   mask,
  input  logic [LANES-1:0][NPE-1:0][DW-1:0]  wtile,
  output logic [4:0]                         out_cnt,
  output logic [LANES-1:0][DW-1:0]           gx,
  output logic [LANES-1:0][NPE-1:0][DW-1:0]  gw
);
  always_comb begin
    logic [4:0] k;
    k  = '0;
    gx = '0;
    gw = '0;
    for (int m = 0; m < LANES; m++) begin
      if (in_valid && mask[m]) begin
        gx[k[3:0]] = x[m];
        gw[k[3:0]] = wtile[m];
        k = k + 5'd1;
      end
    end
    out_cnt = k;
  end
endmodule
