// octent_core: the octree-encoding-based table-aided map search core. It runs block by
// block in two stages. Stage 1 (LOAD): voxels of one 16x16x16 block arrive on vox_*;
// the Coord Transformer computes their octree codes, and each is written into the
// octree table and the Voxel List FIFO. vox_last marks the last voxel of the block.
// Stage 2 (QUERY): the Query Transmitter takes the voxels from the FIFO and queries the
// 8 banks in parallel; one cycle later the Search Filter writes the valid IN-OUT maps
// into the Map Table. When the FIFO is empty and the last results are written the table
// is cleared (CLEAR) and the next block can be imported; blk_done pulses then. The Map
// Table is read by the Top Control Unit on map_rd_*, and can be loaded directly on
// map_ld_* (Gconv3, Tconv2). Structure follows Fig. 4 and Algorithm 1 of the paper;
// the one-block-at-a-time table and the block handshake are this design's choices.
module octent_core
  import spocta_pkg::*;
#(
  parameter int VL_DEPTH = 4096,
  parameter int MT_DEPTH = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  mode_e       mode,
  input  logic        vox_valid,
  output logic        vox_ready,
  input  voxel_t      vox,
  input  logic        vox_last,
  output logic        blk_done,
  output logic        idle,
  input  logic        map_ld_valid,
  output logic        map_ld_ready,
  input  map_entry_t  map_ld_data,
  output logic        map_rd_valid,
  output map_entry_t  map_rd_data,
  input  logic        map_rd_pop,
  output logic        mt_empty,
  output logic        mt_stall
);
  typedef enum logic [1:0] {S_LOAD, S_WAIT, S_QUERY, S_CLEAR} st_e;
  st_e st;

  logic               ct_valid;
  logic [2:0]         ct_phi1;
  logic [TADDR_W-1:0] ct_addr;
  voxel_t             ct_vox;
  logic               vl_pop, vl_empty, vl_full;
  voxel_t             vl_dout;
  logic               qt_valid, qt_busy, stall;
  logic [NBANK-1:0]   q_en;
  logic [NBANK-1:0][TADDR_W-1:0] q_addr;
  qmeta_t             q_meta, r_meta;
  logic               r_valid;
  logic [NBANK-1:0]   hit;
  logic [NBANK-1:0][VID_W-1:0] hidx;
  logic [NBANK-1:0]   sf_wr_en;
  map_entry_t [NBANK-1:0] sf_wr_data;
  logic [2:0]         wr_ptr;
  logic [3:0]         n_valid;
  logic               in_fire;

  assign vox_ready = (st == S_LOAD) && !vl_full;
  assign in_fire   = vox_valid && vox_ready;
  assign idle      = (st == S_LOAD) && !ct_valid;

  coord_transformer u_ct (
    .clk, .rst_n, .in_valid(in_fire), .in_vox(vox),
    .out_valid(ct_valid), .out_phi1(ct_phi1), .out_addr(ct_addr), .out_vox(ct_vox)
  );

  voxel_list_fifo #(.DEPTH(VL_DEPTH)) u_vl (
    .clk, .rst_n, .push(ct_valid), .din(ct_vox), .pop(vl_pop),
    .dout(vl_dout), .empty(vl_empty), .full(vl_full)
  );

  query_transmitter u_qt (
    .clk, .rst_n, .mode,
    .fifo_empty(vl_empty || st != S_QUERY), .fifo_dout(vl_dout), .fifo_pop(vl_pop),
    .stall, .q_valid(qt_valid), .q_en, .q_addr, .q_meta, .busy(qt_busy)
  );

  octree_table u_tab (
    .clk, .rst_n, .clr(st == S_CLEAR),
    .wr_en(ct_valid), .wr_bank(ct_phi1), .wr_addr(ct_addr), .wr_idx(ct_vox.idx),
    .rd_en(qt_valid ? q_en : '0), .rd_addr(q_addr), .rd_hit(hit), .rd_idx(hidx)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_valid <= 1'b0; r_meta <= '0;
    end else begin
      r_valid <= qt_valid;
      if (qt_valid) r_meta <= q_meta;
    end
  end

  search_filter u_sf (
    .res_valid(r_valid), .hit, .idx(hidx), .meta(r_meta), .wr_ptr,
    .wr_en(sf_wr_en), .wr_data(sf_wr_data), .n_valid
  );

  map_table #(.DEPTH(MT_DEPTH)) u_mt (
    .clk, .rst_n, .wr_en(sf_wr_en), .wr_data(sf_wr_data), .wr_ptr,
    .ld_valid(map_ld_valid), .ld_ready(map_ld_ready), .ld_data(map_ld_data),
    .rd_valid(map_rd_valid), .rd_data(map_rd_data), .rd_pop(map_rd_pop),
    .almost_full(stall), .all_empty(mt_empty)
  );
  assign mt_stall = stall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_LOAD; blk_done <= 1'b0;
    end else begin
      blk_done <= 1'b0;
      unique case (st)
        S_LOAD:  if (in_fire && vox_last) st <= S_WAIT;
        S_WAIT:  st <= S_QUERY;                    // last voxel reaches table and FIFO
        S_QUERY: if (vl_empty && !qt_busy && !r_valid) st <= S_CLEAR;
        S_CLEAR: begin st <= S_LOAD; blk_done <= 1'b1; end
        default: st <= S_LOAD;
      endcase
    end
  end
endmodule
