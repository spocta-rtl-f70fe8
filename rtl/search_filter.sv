// search_filter: takes the 8 table results of one query cycle, drops those whose valid
// flag is 0 (Filter), packs the valid ones in bank order and rotates them by the Map
// Table write pointer (Rectifier), so that the maps of one window sit in consecutive
// FIFOs and come back in order when the FIFOs are read in turn. Example of the paper:
// two valid maps and write pointer 1 go to FIFO #1 and #2, and the pointer moves to 3.
// The last map of a window (final query cycle of the voxel) carries the 'last' flag.
// Gconv2: each voxel of a 2x2x2 parent sees the same 8 children; only the voxel with
// the lowest phi1 among the hits emits the window, so every output appears once.
// Purely combinational; the Map Table registers the writes. Filter and rectifier are
// the paper's; the 'last' flag and the Gconv2 de-duplication are this design's choices.
module search_filter
  import spocta_pkg::*;
(
  input  logic                         res_valid,
  input  logic [NBANK-1:0]             hit,
  input  logic [NBANK-1:0][VID_W-1:0]  idx,
  input  qmeta_t                       meta,
  input  logic [2:0]                   wr_ptr,
  output logic [NBANK-1:0]             wr_en,
  output map_entry_t [NBANK-1:0]       wr_data,
  output logic [3:0]                   n_valid
);
  always_comb begin
    map_entry_t packed_m [NBANK];
    logic [3:0] k;
    logic       keep;
    logic [2:0] slot;
    keep = res_valid;
    if (meta.mode == M_GCONV2)
      for (int b = 0; b < NBANK; b++)
        if (hit[b] && 3'(b) < meta.center_phi1) keep = 1'b0;
    // Filter: gather the valid results
    k = '0;
    for (int b = 0; b < NBANK; b++) packed_m[b] = '0;
    for (int b = 0; b < NBANK; b++) begin
      if (keep && hit[b]) begin
        packed_m[k[2:0]].in_idx  = idx[b];
        packed_m[k[2:0]].w_idx   = meta.w_idx[b];
        packed_m[k[2:0]].out_idx = meta.out_idx;
        packed_m[k[2:0]].last    = 1'b0;
        k = k + 4'd1;
      end
    end
    if (k != 0) packed_m[3'(k - 4'd1)].last = meta.last;
    n_valid = k;
    // Rectifier: map j goes to FIFO (wr_ptr + j) mod 8
    wr_en   = '0;
    wr_data = '0;
    for (int j = 0; j < NBANK; j++) begin
      slot = wr_ptr + 3'(j);
      if (4'(j) < k) begin
        wr_en[slot]   = 1'b1;
        wr_data[slot] = packed_m[j];
      end
    end
  end
endmodule
