// coord_transformer: turns a block-local voxel coordinate into its octree code (Eq. 3
// of the paper: phi_l = {z_l, y_l, x_l}). The lowest digit phi1 selects the octree-table
// bank, the higher digits {phi4,phi3,phi2} form the bank address. One register stage:
// out_* is valid the cycle after in_valid. The voxel record is passed on unchanged so
// the same beat can also be written into the Voxel List FIFO. The encoding is the
// paper's; the single register stage is this design's choice.
module coord_transformer
  import spocta_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  voxel_t             in_vox,
  output logic               out_valid,
  output logic [2:0]         out_phi1,
  output logic [TADDR_W-1:0] out_addr,
  output voxel_t             out_vox
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_phi1  <= '0;
      out_addr  <= '0;
      out_vox   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_phi1 <= oct_phi1(in_vox.x, in_vox.y, in_vox.z);
        out_addr <= oct_addr(in_vox.x, in_vox.y, in_vox.z);
        out_vox  <= in_vox;
      end
    end
  end
endmodule
