// octree_table: the 2-dim octree table T[phi1][{phi_i..phi_2}] of the OCTENT core.
// Eight banks, bank i holding the sites whose lowest octree digit is i, each 512 deep
// so a whole 16x16x16 block fits. An entry is the voxel index plus a valid bit. One
// write port (stage 1, from the Coord Transformer) and one read port per bank (stage 2,
// one query per bank per cycle, results one cycle later). clr invalidates every entry in
// one cycle between blocks. Bank structure and addressing follow the paper; storing the
// voxel index instead of the coordinate, the flip-flop valid bits and the one-cycle
// clear are this design's choices.
module octree_table
  import spocta_pkg::*;
#(
  parameter int NB    = NBANK,
  parameter int DEPTH = 1 << TADDR_W
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             clr,
  input  logic                             wr_en,
  input  logic [2:0]                       wr_bank,
  input  logic [TADDR_W-1:0]               wr_addr,
  input  logic [VID_W-1:0]                 wr_idx,
  input  logic [NB-1:0]                    rd_en,
  input  logic [NB-1:0][TADDR_W-1:0]       rd_addr,
  output logic [NB-1:0]                    rd_hit,
  output logic [NB-1:0][VID_W-1:0]         rd_idx
);
  logic [VID_W-1:0] idx_mem [NB][DEPTH];
  logic [DEPTH-1:0] vld [NB];

  for (genvar b = 0; b < NB; b++) begin : g_bank
    always_ff @(posedge clk)
      if (wr_en && wr_bank == 3'(b)) idx_mem[b][wr_addr] <= wr_idx;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)     vld[b] <= '0;
      else if (clr)   vld[b] <= '0;
      else if (wr_en && wr_bank == 3'(b)) vld[b][wr_addr] <= 1'b1;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rd_hit[b] <= 1'b0;
        rd_idx[b] <= '0;
      end else begin
        rd_hit[b] <= rd_en[b] && vld[b][rd_addr[b]];
        if (rd_en[b]) rd_idx[b] <= idx_mem[b][rd_addr[b]];
      end
    end
  end
endmodule
