// weight_mem: the non-uniform weight memory. One flat array of 16x16 weight tiles
// (2048 bits, tile[m][n] = weight from input lane m to output channel n) split into four
// partitions: W_center [0,256) holds every centre-offset tile of a layer (Cout x Cin x 1),
// W_mid [256,384) holds C'out x Cin x 8 (32 KB, the paper's limit), W_up [384,416) and
// W_down [416,448) hold the kernel offsets of the dz=+1 / dz=-1 planes that the layer's
// reserved lists keep on chip. The Weight Fetcher computes the address. Synchronous
// read, data one cycle after rd_en and held. Partition roles and the 32 KB mid size are
// the paper's; the other sizes and the tile-wide word are this design's choices.
module weight_mem
  import spocta_pkg::*;
#(
  parameter int WORDS = WM_WORDS
) (
  input  logic                                 clk,
  input  logic                                 wr_en,
  input  logic [$clog2(WORDS)-1:0]             wr_addr,
  input  logic [LANES-1:0][NPE-1:0][DW-1:0]    wr_data,
  input  logic                                 rd_en,
  input  logic [$clog2(WORDS)-1:0]             rd_addr,
  output logic [LANES-1:0][NPE-1:0][DW-1:0]    rd_data
);
  logic [LANES-1:0][NPE-1:0][DW-1:0] mem [WORDS];
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
