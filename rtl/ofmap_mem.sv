// ofmap_mem: partial-sum memory for input-stationary layers (Gconv3, Tconv2). A word is
// the 16 psums of one output voxel and one output tile, address out_idx*(Cout/16)+otile,
// plus a valid bit saying the word holds a partial sum. A write sets the bit, clr_en
// clears one; reset clears all. Synchronous read: rd_data/rd_valid one cycle after
// rd_en. The memory is the paper's Ofmap Mem; size (1024 words) and the valid bits are
// this design's choices.
module ofmap_mem
  import spocta_pkg::*;
#(
  parameter int WORDS = OFM_WORDS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          wr_en,
  input  logic [$clog2(WORDS)-1:0]      wr_addr,
  input  logic [NPE-1:0][PSW-1:0]       wr_data,
  input  logic                          clr_en,
  input  logic [$clog2(WORDS)-1:0]      clr_addr,
  input  logic                          rd_en,
  input  logic [$clog2(WORDS)-1:0]      rd_addr,
  output logic [NPE-1:0][PSW-1:0]       rd_data,
  output logic                          rd_valid
);
  logic [NPE-1:0][PSW-1:0] mem [WORDS];
  logic [WORDS-1:0]        vld;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0; rd_valid <= 1'b0;
    end else begin
      if (clr_en) vld[clr_addr] <= 1'b0;
      if (wr_en)  vld[wr_addr]  <= 1'b1;
      if (rd_en)  rd_valid <= vld[rd_addr];
    end
  end
endmodule
