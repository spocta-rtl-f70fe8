// voxel_list_fifo: the Voxel List FIFO of the OCTENT core. During stage 1 every voxel of
// the current block is pushed as it is written into the octree table; during stage 2
// the Query Transmitter pops one voxel per search round. Depth 4096 lets a fully
// occupied 16x16x16 block fit (depth is this design's choice). First-word fall-through.
module voxel_list_fifo
  import spocta_pkg::*;
#(
  parameter int DEPTH = 4096
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   push,
  input  voxel_t din,
  input  logic   pop,
  output voxel_t dout,
  output logic   empty,
  output logic   full
);
  logic [$clog2(DEPTH+1)-1:0] count;
  sync_fifo #(.T(voxel_t), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .push, .din, .pop, .dout, .empty, .full, .count
  );
endmodule
