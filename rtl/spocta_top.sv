// spocta_top: the SpOctA accelerator. The OCTENT core searches the IN-OUT maps of each
// 16x16x16 block with the octree table and writes them to the Map Table; the Top Control
// Unit turns the maps into compute jobs; the SPAC core gathers the nonzero features and
// their weights and runs the 16x16 PE array, postprocesses finished outputs and writes
// them out. Search of later blocks overlaps computing of earlier maps through the Map
// Table (fine-grained pipeline). Subm3 and Gconv2 maps are searched; Gconv3 and Tconv2
// maps are loaded on map_ld_*. The external memory bus is split into plain ports:
// voxel import, map load / export, ifmap / weight / bias loading, external weight fetch
// and output writes. A layer: set cfg, load weights, biases and features, stream the
// voxels of each block (or load the maps), raise layer_end, wait for done.
module spocta_top
  import spocta_pkg::*;
(
  input  logic                               clk,
  input  logic                               rst_n,
  input  layer_cfg_t                         cfg,
  // voxels of one block at a time
  input  logic                               vox_valid,
  output logic                               vox_ready,
  input  voxel_t                             vox,
  input  logic                               vox_last,
  output logic                               blk_done,
  // maps loaded from / exported to external memory
  input  logic                               map_ld_valid,
  output logic                               map_ld_ready,
  input  map_entry_t                         map_ld_data,
  output logic                               map_exp_valid,
  output map_entry_t                         map_exp_data,
  // on-chip memory loading
  input  logic                               ifm_wr_en,
  input  logic [IFM_AW-1:0]                  ifm_wr_addr,
  input  logic [LANES-1:0][DW-1:0]           ifm_wr_data,
  input  logic                               wm_wr_en,
  input  logic [WM_AW-1:0]                   wm_wr_addr,
  input  logic [LANES-1:0][NPE-1:0][DW-1:0]  wm_wr_data,
  input  logic                               bias_wr_en,
  input  logic [7:0]                         bias_wr_addr,
  input  logic [PSW-1:0]                     bias_wr_data,
  // weight tiles fetched from external memory
  output logic                               ext_w_req,
  output logic [WIDX_W-1:0]                  ext_w_widx,
  output logic [CH_W-1:0]                    ext_w_otile,
  output logic [CH_W-1:0]                    ext_w_chunk,
  input  logic                               ext_w_valid,
  input  logic [LANES-1:0][NPE-1:0][DW-1:0]  ext_w_data,
  // output features
  output logic                               out_valid,
  output logic [VID_W-1:0]                   out_idx,
  output logic [CH_W-1:0]                    out_otile,
  output logic [NPE-1:0][DW-1:0]             out_data,
  output logic [NPE-1:0]                     out_mask,
  // layer control and counters
  input  logic                               layer_end,
  output logic                               done,
  output logic                               search_stall,
  output logic [31:0]                        n_windows,
  output logic [31:0]                        n_fire,
  output logic [31:0]                        n_ext,
  output logic [31:0]                        n_skip
);
  logic       map_valid, map_pop, mt_empty, oc_idle;
  map_entry_t map_data;
  logic       job_valid, job_ready, drain_req, drain_done, spac_idle;
  job_t       job;

  octent_core u_octent (
    .clk, .rst_n, .mode(cfg.mode), .vox_valid, .vox_ready, .vox, .vox_last, .blk_done,
    .idle(oc_idle), .map_ld_valid, .map_ld_ready, .map_ld_data,
    .map_rd_valid(map_valid), .map_rd_data(map_data), .map_rd_pop(map_pop),
    .mt_empty, .mt_stall(search_stall)
  );

  top_control_unit u_tcu (
    .clk, .rst_n, .cfg, .map_valid, .map_data, .map_pop, .maps_empty(mt_empty),
    .search_idle(oc_idle), .job_valid, .job_ready, .job, .drain_req, .drain_done,
    .spac_idle, .layer_end, .done, .map_exp_valid, .map_exp_data, .n_windows
  );

  spac_core u_spac (
    .clk, .rst_n, .cfg, .job_valid, .job_ready, .job, .drain_req, .drain_done,
    .idle(spac_idle), .ifm_wr_en, .ifm_wr_addr, .ifm_wr_data, .wm_wr_en, .wm_wr_addr,
    .wm_wr_data, .bias_wr_en, .bias_wr_addr, .bias_wr_data, .ext_w_req, .ext_w_widx,
    .ext_w_otile, .ext_w_chunk, .ext_w_valid, .ext_w_data, .out_valid, .out_idx,
    .out_otile, .out_data, .out_mask, .n_fire, .n_ext, .n_skip
  );
endmodule
