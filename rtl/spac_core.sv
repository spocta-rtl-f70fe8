// spac_core: the sparsity-aware computing core. It executes compute jobs; a job is one
// IN-OUT map entry for one 16-channel input chunk and one 16-channel output tile, and a
// run of jobs from 'first' to 'last' accumulates into one output vector. Per job:
//   ISSUE  the Weight Fetcher decides where the weight tile lives; the feature word is
//          read from the Ifmap Mem and the tile from the Weight Mem, or requested from
//          external memory (ext_w_req ... ext_w_valid) when the fetcher says so;
//   PUSH   the Gather Unit drops zero features with their weight columns and the Data
//          Buffer spreads the kept pairs over 16 lanes;
// The PE array fires whenever all 16 lanes hold a pair, so its work follows the number
// of nonzero features, not Cin. After a group's last job the buffer is flushed (partly
// filled vectors fire), and the psums go to the Ofmap Arranger: finished (output
// stationary: Subm3, Gconv2) to postprocessing and out_*, or back to the Ofmap Mem
// (input stationary: Gconv3, Tconv2), whose stored psum then initialises the PE array at
// the next group for the same output (Switch 2). drain_req makes the core scan the Ofmap
// Mem and finish every stored output; drain_done pulses at the end. A job takes two
// cycles plus any external-weight wait; a group adds a flush and one result cycle.
// Structure follows the paper's Fig. 7; the job interface, the unpipelined job issue and
// the drain scan are this design's choices. The input-reuse switch (Switch 1) is not
// built: every job reads its feature word.
module spac_core
  import spocta_pkg::*;
(
  input  logic                               clk,
  input  logic                               rst_n,
  input  layer_cfg_t                         cfg,
  input  logic                               job_valid,
  output logic                               job_ready,
  input  job_t                               job,
  input  logic                               drain_req,
  output logic                               drain_done,
  output logic                               idle,
  // memory loading from the external bus
  input  logic                               ifm_wr_en,
  input  logic [IFM_AW-1:0]                  ifm_wr_addr,
  input  logic [LANES-1:0][DW-1:0]           ifm_wr_data,
  input  logic                               wm_wr_en,
  input  logic [WM_AW-1:0]                   wm_wr_addr,
  input  logic [LANES-1:0][NPE-1:0][DW-1:0]  wm_wr_data,
  input  logic                               bias_wr_en,
  input  logic [7:0]                         bias_wr_addr,
  input  logic [PSW-1:0]                     bias_wr_data,
  // weight tiles not held on chip
  output logic                               ext_w_req,
  output logic [WIDX_W-1:0]                  ext_w_widx,
  output logic [CH_W-1:0]                    ext_w_otile,
  output logic [CH_W-1:0]                    ext_w_chunk,
  input  logic                               ext_w_valid,
  input  logic [LANES-1:0][NPE-1:0][DW-1:0]  ext_w_data,
  // finished output features to external memory
  output logic                               out_valid,
  output logic [VID_W-1:0]                   out_idx,
  output logic [CH_W-1:0]                    out_otile,
  output logic [NPE-1:0][DW-1:0]             out_data,
  output logic [NPE-1:0]                     out_mask,
  // event counters
  output logic [31:0]                        n_fire,
  output logic [31:0]                        n_ext,
  output logic [31:0]                        n_skip
);
  typedef enum logic [3:0] {J_IDLE, J_INIT, J_ISSUE, J_EXT, J_PUSH, J_FLUSH, J_ACC,
                            D_RD, D_CHK, D_DONE} st_e;
  st_e  st;
  job_t jb;
  logic is_mode;
  assign is_mode = (cfg.mode == M_GCONV3) || (cfg.mode == M_TCONV2);

  // ---- weight fetcher ----
  logic wf_a, wf_r, wf_ext;
  logic [WM_AW-1:0] wf_addr;
  weight_fetcher u_wf (.cfg, .w_idx(jb.w_idx), .otile(jb.otile), .chunk(jb.chunk),
                       .stat_a(wf_a), .stat_r(wf_r), .src_ext(wf_ext), .addr(wf_addr));

  // ---- memories ----
  logic [LANES-1:0][DW-1:0]          ifm_q;
  logic [LANES-1:0]                  ifm_mask;
  logic [LANES-1:0][NPE-1:0][DW-1:0] wm_q, ext_tile, wtile;
  logic                              ifm_rd, wm_rd, use_ext;
  logic [IFM_AW-1:0]                 ifm_rd_addr;
  assign ifm_rd      = (st == J_ISSUE);
  assign ifm_rd_addr = IFM_AW'(int'(jb.in_idx) * int'(cfg.cin_chunks) + int'(jb.chunk));
  assign wm_rd       = (st == J_ISSUE) && !wf_ext;

  ifmap_mem u_ifm (.clk, .wr_en(ifm_wr_en), .wr_addr(ifm_wr_addr), .wr_data(ifm_wr_data),
                   .rd_en(ifm_rd), .rd_addr(ifm_rd_addr), .rd_data(ifm_q), .rd_mask(ifm_mask));
  weight_mem u_wm (.clk, .wr_en(wm_wr_en), .wr_addr(wm_wr_addr), .wr_data(wm_wr_data),
                   .rd_en(wm_rd), .rd_addr(wf_addr), .rd_data(wm_q));
  assign wtile = use_ext ? ext_tile : wm_q;

  // ---- gather + data buffer ----
  logic [4:0]                         g_cnt;
  logic [LANES-1:0][DW-1:0]           g_x, hx;
  logic [LANES-1:0][NPE-1:0][DW-1:0]  g_w, hw;
  logic                               db_ready, db_empty, push;
  logic [LANES-1:0]                   lane_valid, lane_pop;
  assign push = (st == J_PUSH) && db_ready;
  gather_unit u_ga (.in_valid(st == J_PUSH), .x(ifm_q), .mask(ifm_mask), .wtile,
                    .out_cnt(g_cnt), .gx(g_x), .gw(g_w));
  data_buffer u_db (.clk, .rst_n, .in_valid(push), .in_ready(db_ready), .in_cnt(g_cnt),
                    .in_x(g_x), .in_w(g_w), .lane_valid, .hx, .hw, .pop(lane_pop),
                    .empty(db_empty));

  // ---- PE array ----
  logic                    fire, pe_init;
  logic [NPE-1:0][PSW-1:0] psum_init, psum;
  assign fire     = !db_empty && ((&lane_valid) || st == J_FLUSH);
  assign lane_pop = fire ? lane_valid : '0;
  pe_array u_pe (.clk, .rst_n, .init(pe_init), .psum_init, .fire, .lane_valid,
                 .x(hx), .w(hw), .psum);

  // ---- ofmap memory, arranger, postprocessing ----
  logic                    ofm_wr, ofm_rd, ofm_rvalid, ofm_clr;
  logic [OFM_AW-1:0]       ofm_waddr, ofm_raddr;
  logic [NPE-1:0][PSW-1:0] ofm_wdata, ofm_q;
  logic                    acc_valid, acc_final;
  logic [NPE-1:0][PSW-1:0] acc_psum;
  logic [VID_W-1:0]        acc_out;
  logic [CH_W-1:0]         acc_ot;
  logic                    pp_iv, pp_ov;
  logic [NPE-1:0][PSW-1:0] pp_ip;
  logic [CH_W-1:0]         pp_iot;
  logic [VID_W+CH_W-1:0]   pp_itag, pp_otag;
  logic [NPE-1:0][DW-1:0]  pp_od;
  logic [31:0]             n_written;
  logic [OFM_AW-1:0]       d_addr;
  logic [VID_W-1:0]        d_out;
  logic [CH_W-1:0]         d_ot;

  assign ofm_rd    = (st == J_IDLE && job_valid && !drain_req && job.first && is_mode) || st == D_RD;
  assign ofm_raddr = (st == D_RD) ? d_addr
                   : OFM_AW'(int'(job.out_idx) * int'(cfg.cout_tiles) + int'(job.otile));
  assign ofm_clr   = (st == D_CHK) && ofm_rvalid;

  ofmap_mem u_ofm (.clk, .rst_n, .wr_en(ofm_wr), .wr_addr(ofm_waddr), .wr_data(ofm_wdata),
                   .clr_en(ofm_clr), .clr_addr(d_addr), .rd_en(ofm_rd), .rd_addr(ofm_raddr),
                   .rd_data(ofm_q), .rd_valid(ofm_rvalid));

  always_comb begin
    acc_valid = 1'b0; acc_final = 1'b0; acc_psum = psum; acc_out = jb.out_idx; acc_ot = jb.otile;
    if (st == J_ACC) begin
      acc_valid = 1'b1; acc_final = !is_mode;
    end else if (st == D_CHK && ofm_rvalid) begin
      acc_valid = 1'b1; acc_final = 1'b1; acc_psum = ofm_q; acc_out = d_out; acc_ot = d_ot;
    end
  end

  ofmap_arranger u_oa (.clk, .rst_n, .cfg, .acc_valid, .acc_final, .acc_psum,
                       .acc_out_idx(acc_out), .acc_otile(acc_ot),
                       .ofm_wr_en(ofm_wr), .ofm_wr_addr(ofm_waddr), .ofm_wr_data(ofm_wdata),
                       .pp_in_valid(pp_iv), .pp_in_psum(pp_ip), .pp_in_otile(pp_iot),
                       .pp_in_tag(pp_itag), .pp_out_valid(pp_ov), .pp_out_data(pp_od),
                       .pp_out_tag(pp_otag), .ext_wr_valid(out_valid), .ext_wr_out_idx(out_idx),
                       .ext_wr_otile(out_otile), .ext_wr_data(out_data), .ext_wr_mask(out_mask),
                       .n_written);
  postprocessing_unit u_pp (.clk, .rst_n, .cfg, .bias_wr_en, .bias_wr_addr, .bias_wr_data,
                            .in_valid(pp_iv), .in_otile(pp_iot), .in_psum(pp_ip), .in_tag(pp_itag),
                            .out_valid(pp_ov), .out_data(pp_od), .out_tag(pp_otag));

  // ---- job sequencer ----
  assign job_ready  = (st == J_IDLE) && !drain_req;
  assign ext_w_req  = (st == J_ISSUE) && wf_ext;
  assign ext_w_widx = jb.w_idx;
  assign ext_w_otile = jb.otile;
  assign ext_w_chunk = jb.chunk;
  assign idle       = (st == J_IDLE) && db_empty;

  always_comb begin
    pe_init   = 1'b0;
    psum_init = '0;
    if (st == J_IDLE && job_valid && !drain_req && job.first && !is_mode) pe_init = 1'b1;
    if (st == J_INIT) begin
      pe_init = 1'b1;
      if (ofm_rvalid) psum_init = ofm_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= J_IDLE; jb <= '0; use_ext <= 1'b0; ext_tile <= '0;
      d_addr <= '0; d_out <= '0; d_ot <= '0; drain_done <= 1'b0;
      n_fire <= '0; n_ext <= '0; n_skip <= '0;
    end else begin
      drain_done <= 1'b0;
      if (fire) n_fire <= n_fire + 32'd1;
      if (ext_w_req) n_ext <= n_ext + 32'd1;
      if (push) n_skip <= n_skip + 32'(5'd16 - g_cnt);
      unique case (st)
        J_IDLE: if (drain_req) begin
                  st <= D_RD; d_addr <= '0; d_out <= '0; d_ot <= '0;
                end else if (job_valid) begin
                  jb <= job;
                  st <= (job.first && is_mode) ? J_INIT : J_ISSUE;
                end
        J_INIT:  st <= J_ISSUE;
        J_ISSUE: begin use_ext <= wf_ext; st <= wf_ext ? J_EXT : J_PUSH; end
        J_EXT:   if (ext_w_valid) begin ext_tile <= ext_w_data; st <= J_PUSH; end
        J_PUSH:  if (db_ready) st <= jb.last ? J_FLUSH : J_IDLE;
        J_FLUSH: if (db_empty) st <= J_ACC;
        J_ACC:   st <= J_IDLE;
        D_RD:    st <= D_CHK;
        D_CHK: begin
          if (d_addr == OFM_AW'(OFM_WORDS-1) ||
              (d_ot == CH_W'(cfg.cout_tiles - 1) && d_out == {VID_W{1'b1}})) st <= D_DONE;
          else st <= D_RD;
          d_addr <= d_addr + 1'b1;
          if (d_ot == CH_W'(cfg.cout_tiles - 1)) begin d_ot <= '0; d_out <= d_out + 1'b1; end
          else d_ot <= d_ot + 1'b1;
        end
        D_DONE: if (!pp_iv && !pp_ov) begin st <= J_IDLE; drain_done <= 1'b1; end
        default: st <= J_IDLE;
      endcase
    end
  end

  a_ext_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 st == J_EXT |-> ext_w_req == 1'b0);
endmodule
