// ifmap_mem: on-chip input feature memory of the SPAC core. A word holds 16 channels of
// signed 8-bit features of one voxel and the 16-bit nonzero mask of those channels; the
// mask is made when the word is written, so the Gather Unit gets features and mask in
// one read. Word address = voxel index * (Cin/16) + channel chunk. Synchronous read,
// data one cycle after rd_en and held until the next read. Storing masks next to the
// features follows the paper's figure; size (4096 words) and mask-at-write are choices.
module ifmap_mem
  import spocta_pkg::*;
#(
  parameter int WORDS = IFM_WORDS
) (
  input  logic                         clk,
  input  logic                         wr_en,
  input  logic [$clog2(WORDS)-1:0]     wr_addr,
  input  logic [LANES-1:0][DW-1:0]     wr_data,
  input  logic                         rd_en,
  input  logic [$clog2(WORDS)-1:0]     rd_addr,
  output logic [LANES-1:0][DW-1:0]     rd_data,
  output logic [LANES-1:0]             rd_mask
);
  logic [LANES-1:0][DW-1:0] feat [WORDS];
  logic [LANES-1:0]         mask [WORDS];
  logic [LANES-1:0]         wr_mask;

  always_comb
    for (int i = 0; i < LANES; i++) wr_mask[i] = |wr_data[i];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      feat[wr_addr] <= wr_data;
      mask[wr_addr] <= wr_mask;
    end
    if (rd_en) begin
      rd_data <= feat[rd_addr];
      rd_mask <= mask[rd_addr];
    end
  end
endmodule
