// tb_spocta_top: end-to-end test of the accelerator at its default sizes. Three layers
// run back to back, each checked output by output against an integer reference that
// does its own brute-force neighbour search:
//   layer 1  Subm3 over two dense 16^3 blocks (searched on chip, output stationary),
//            16->32 channels (1 input chunk x 2 output tiles), partial weight caching so
//            that uncached offsets and tile 1 of the mid/up/down offsets come from the
//            external responder;
//   layer 2  Gconv2 over one block (mode switch; parent address as output index); its
//            maps are exported with input and output swapped;
//   layer 3  Tconv2 on the exported maps loaded back through the map-load port
//            (input stationary, psums written back, finished by the drain).
// Mechanisms counted, each must happen at least once: search stall on a full Map Table,
// external weight fetch, zero-feature skip, mode switch, map export, map load, Ofmap Mem
// write-back, drain, and output export. The PE firing count is also checked against
// ceil(nonzero pairs / 16) per accumulation group.
module tb_spocta_top;
  import spocta_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  layer_cfg_t cfg;
  logic vox_valid, vox_ready, vox_last, blk_done;
  voxel_t vox;
  logic map_ld_valid, map_ld_ready, map_exp_valid;
  map_entry_t map_ld_data, map_exp_data;
  logic ifm_wr_en, wm_wr_en, bias_wr_en;
  logic [IFM_AW-1:0] ifm_wr_addr;
  logic [15:0][7:0] ifm_wr_data;
  logic [WM_AW-1:0] wm_wr_addr;
  logic [15:0][15:0][7:0] wm_wr_data, ext_w_data;
  logic [7:0] bias_wr_addr;
  logic [31:0] bias_wr_data;
  logic ext_w_req, ext_w_valid, out_valid;
  logic [4:0] ext_w_widx;
  logic [3:0] ext_w_otile, ext_w_chunk, out_otile;
  logic [11:0] out_idx;
  logic [15:0][7:0] out_data;
  logic [15:0] out_mask;
  logic layer_end, done, search_stall;
  logic [31:0] n_windows, n_fire, n_ext, n_skip;

  spocta_top dut (.*);

  logic [15:0][7:0] feat [4096];
  int bias [256];
  longint accv [int][16];
  logic [15:0][7:0] got [int];
  int got_cnt [int];
  map_entry_t exported [$];
  int n_exp_fire = 0, n_out = 0;
  int c_stall = 0, c_ext = 0, c_skip = 0, c_switch = 0, c_export = 0, c_load = 0,
      c_wb = 0, c_drain = 0, c_out = 0, n_blk = 0;
  mode_e last_mode = M_SUBM3;

  function automatic logic [7:0] wv(int w, int o, int k, int m, int n);
    int unsigned h;
    h = 32'(w * 131 + o * 17 + k * 7 + 1) * 32'd2654435761 + 32'(m * 16 + n) * 32'd40503;
    h = h ^ (h >> 15);
    h = h * 32'd2246822519;
    return 8'(h >> 20);
  endfunction
  function automatic logic [15:0][15:0][7:0] tile(int w, int o, int k);
    for (int m = 0; m < 16; m++) for (int n = 0; n < 16; n++) tile[m][n] = wv(w, o, k, m, n);
  endfunction
  function automatic int subm_addr(int w, int o, int k);
    int cc; cc = cfg.cin_chunks;
    if (w == 13) return o * cc + k;
    if (w / 9 == 1) return (o < cfg.mid_otiles) ? 256 + (((w < 13) ? w - 9 : w - 10) * cfg.mid_otiles + o) * cc + k : -1;
    if (o >= cfg.ud_otiles) return -1;
    if (w == 22) return 384 + o * cc + k;
    if (w == 4)  return 416 + o * cc + k;
    return -1;
  endfunction
  function automatic logic [7:0] pp(longint ps, int b);
    longint v; v = (ps + b) * cfg.pp_scale; v = v >>> cfg.pp_shift;
    if (v > 127) v = 127; if (v < -128) v = -128; if (cfg.pp_relu && v < 0) v = 0;
    return 8'(v);
  endfunction
  function automatic int paddr(voxel_t v);
    return {v.z[3], v.y[3], v.x[3], v.z[2], v.y[2], v.x[2], v.z[1], v.y[1], v.x[1]};
  endfunction

  // external weight responder, random latency
  int ext_wait = -1;
  always @(negedge clk) begin
    ext_w_valid <= 1'b0;
    if (ext_wait > 0) ext_wait <= ext_wait - 1;
    else if (ext_wait == 0) begin
      ext_w_valid <= 1'b1; ext_w_data <= tile(ext_w_widx, ext_w_otile, ext_w_chunk); ext_wait <= -1;
    end
    if (ext_w_req) ext_wait <= $urandom % 6;
  end
  // monitors
  always @(negedge clk) if (rst_n) begin
    if (search_stall) c_stall++;
    if (ext_w_req) c_ext++;
    if (blk_done) n_blk++;
    if (map_exp_valid) begin c_export++; exported.push_back(map_exp_data); end
    if (map_ld_valid && map_ld_ready) c_load++;
    if (dut.u_spac.ofm_wr) c_wb++;
    if (dut.u_spac.drain_done) c_drain++;
    if (cfg.mode != last_mode) begin c_switch++; last_mode = cfg.mode; end
    if (out_valid) begin
      int key; logic [15:0] m;
      key = out_idx * 16 + out_otile; got[key] = out_data; c_out++;
      if (got_cnt.exists(key)) got_cnt[key]++; else got_cnt[key] = 1;
      for (int n = 0; n < 16; n++) m[n] = out_data[n] != 0;
      checks++; if (out_mask != m) begin failures++; $display("FAIL mask"); end
    end
  end

  initial begin repeat (3000000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic load_feats(int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk); ifm_wr_en = 1; ifm_wr_addr = IFM_AW'(i);
      for (int c = 0; c < 16; c++) feat[i][c] = ($urandom % 2) ? 8'($urandom) : 8'd0;
      ifm_wr_data = feat[i];
    end
    @(negedge clk); ifm_wr_en = 0;
  endtask
  task automatic load_weights();
    for (int w = 0; w < 27; w++) for (int o = 0; o < cfg.cout_tiles; o++) for (int k = 0; k < cfg.cin_chunks; k++) begin
      int a;
      if (cfg.mode == M_SUBM3) a = subm_addr(w, o, k);
      else begin a = (w * cfg.cout_tiles + o) * cfg.cin_chunks + k; if (a >= WM_WORDS) a = -1; end
      if (a >= 0) begin @(negedge clk); wm_wr_en = 1; wm_wr_addr = WM_AW'(a); wm_wr_data = tile(w, o, k); end
    end
    @(negedge clk); wm_wr_en = 0;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); bias_wr_en = 1; bias_wr_addr = 8'(i); bias[i] = int'($urandom % 201) - 100; bias_wr_data = bias[i];
    end
    @(negedge clk); bias_wr_en = 0;
  endtask
  // a random dense cluster of voxels in one block, with indices base, base+1, ...
  task automatic make_block(output voxel_t v [$], input int n, input int span, input int base);
    int occ [int];
    v.delete();
    while (v.size() < n) begin
      voxel_t t; int s;
      t.x = 4'(($urandom % span) + 3); t.y = 4'($urandom % span); t.z = 4'(($urandom % span) + 16 - span);
      s = {t.z, t.y, t.x};
      if (!occ.exists(s)) begin occ[s] = 1; t.idx = 12'(base + v.size()); v.push_back(t); end
    end
  endtask
  task automatic stream(input voxel_t v [$]);
    foreach (v[i]) begin
      @(negedge clk); vox_valid = 1; vox = v[i]; vox_last = (i == v.size() - 1);
      #1; while (!vox_ready) begin @(negedge clk); #1; end
    end
    @(negedge clk); vox_valid = 0; vox_last = 0;
  endtask
  // expected sum for one map (in, w) into (out, all tiles)
  task automatic add_map(int in, int w, int out, ref int nnz [int]);
    for (int ot = 0; ot < cfg.cout_tiles; ot++) begin
      logic [15:0][15:0][7:0] t; int key;
      key = out * 16 + ot; t = tile(w, ot, 0);
      if (!accv.exists(key)) for (int n = 0; n < 16; n++) accv[key][n] = 0;
      if (!nnz.exists(key)) nnz[key] = 0;
      for (int c = 0; c < 16; c++) if (feat[in][c] != 0) begin
        nnz[key]++;
        for (int n = 0; n < 16; n++) accv[key][n] += $signed(feat[in][c]) * $signed(t[c][n]);
      end
    end
  endtask
  task automatic finish_layer(string tag);
    int t0;
    @(negedge clk); layer_end = 1;
    t0 = 0; while (!done && t0 < 1000000) begin @(negedge clk); t0++; end
    checks++; if (!done) begin failures++; $display("FAIL %s never done", tag); end
    layer_end = 0;
    @(negedge clk); @(negedge clk);
    foreach (accv[key]) begin
      logic [15:0][7:0] e;
      for (int n = 0; n < 16; n++) e[n] = pp(accv[key][n], bias[(key % 16) * 16 + n]);
      checks++;
      if (!got.exists(key)) begin failures++; $display("FAIL %s missing out %0d tile %0d", tag, key / 16, key % 16); end
      else if (got[key] != e || got_cnt[key] != 1) begin failures++; $display("FAIL %s out %0d tile %0d", tag, key / 16, key % 16); end
    end
    checks++; if (got.size() != accv.size()) begin failures++; $display("FAIL %s %0d outputs, %0d expected", tag, got.size(), accv.size()); end
    checks++; if (n_fire != 32'(n_exp_fire)) begin failures++; $display("FAIL %s fires %0d expected %0d", tag, n_fire, n_exp_fire); end
    $display("%s: outputs=%0d fires=%0d ext=%0d skipped=%0d windows=%0d cycles so far=%0t",
             tag, got.size(), n_fire, n_ext, n_skip, n_windows, $time / 10);
    accv.delete(); got.delete(); got_cnt.delete();
  endtask

  initial begin
    voxel_t blk [$];
    voxel_t all [$];
    int nnz [int];
    cfg = '0; vox_valid = 0; vox = '0; vox_last = 0; map_ld_valid = 0; map_ld_data = '0;
    ifm_wr_en = 0; ifm_wr_addr = 0; ifm_wr_data = '0; wm_wr_en = 0; wm_wr_addr = 0; wm_wr_data = '0;
    bias_wr_en = 0; bias_wr_addr = 0; bias_wr_data = 0; ext_w_valid = 0; ext_w_data = '0; layer_end = 0;
    repeat (2) @(posedge clk); @(negedge clk); rst_n = 1;

    // ---------------- layer 1: Subm3, two blocks ----------------
    cfg.mode = M_SUBM3; cfg.cin_chunks = 5'd1; cfg.cout_tiles = 5'd2; cfg.mid_otiles = 5'd1; cfg.ud_otiles = 5'd1;
    cfg.n_up = 4'd1; cfg.up_list[0] = 5'd22; cfg.n_down = 4'd1; cfg.down_list[0] = 5'd4;
    cfg.pp_scale = 16'sd1; cfg.pp_shift = 5'd7; cfg.pp_relu = 1'b1;
    load_feats(400); load_weights();
    for (int b = 0; b < 2; b++) begin
      make_block(blk, 60, 4, b * 200);
      nnz.delete();
      foreach (blk[a]) foreach (blk[j]) begin
        int dx, dy, dz;
        dx = int'(blk[a].x) - int'(blk[j].x); dy = int'(blk[a].y) - int'(blk[j].y); dz = int'(blk[a].z) - int'(blk[j].z);
        if (dx >= -1 && dx <= 1 && dy >= -1 && dy <= 1 && dz >= -1 && dz <= 1)
          add_map(blk[j].idx, (dx+1) + 3*(dy+1) + 9*(dz+1), blk[a].idx, nnz);
      end
      foreach (nnz[k]) n_exp_fire += (nnz[k] + 15) / 16;
      stream(blk);
    end
    while (n_blk < 2) @(negedge clk);
    finish_layer("subm3");

    // ---------------- layer 2: Gconv2, one block, maps exported ----------------
    cfg.mode = M_GCONV2; cfg.cout_tiles = 5'd1; cfg.pp_shift = 5'd6; cfg.pp_relu = 1'b0;
    load_weights();
    make_block(blk, 90, 6, 0);
    nnz.delete();
    foreach (blk[j]) add_map(blk[j].idx, {blk[j].z[0], blk[j].y[0], blk[j].x[0]}, paddr(blk[j]), nnz);
    foreach (nnz[k]) n_exp_fire += (nnz[k] + 15) / 16;
    all = blk;
    n_blk = 0;
    stream(blk);
    while (n_blk < 1) @(negedge clk);
    finish_layer("gconv2");
    checks++; if (exported.size() != all.size()) begin failures++; $display("FAIL exported %0d maps", exported.size()); end

    // ---------------- layer 3: Tconv2 on the exported maps ----------------
    cfg.mode = M_TCONV2; cfg.pp_shift = 5'd6; cfg.pp_relu = 1'b1;
    load_feats(512); load_weights();
    foreach (all[j]) begin
      nnz.delete();
      add_map(paddr(all[j]), {all[j].z[0], all[j].y[0], all[j].x[0]}, all[j].idx, nnz);
      foreach (nnz[k]) n_exp_fire += (nnz[k] + 15) / 16;
    end
    foreach (exported[i]) begin
      checks++;
      if (exported[i].last != 1'b1) failures++;
      @(negedge clk); map_ld_valid = 1; map_ld_data = exported[i];
      #1; while (!map_ld_ready) begin @(negedge clk); #1; end
    end
    @(negedge clk); map_ld_valid = 0;
    finish_layer("tconv2");

    $display("events: stall=%0d ext_fetch=%0d skipped=%0d mode_switch=%0d export=%0d load=%0d writeback=%0d drain=%0d outputs=%0d",
             c_stall, c_ext, n_skip, c_switch, c_export, c_load, c_wb, c_drain, c_out);
    if (c_stall == 0)  begin failures++; $display("FAIL no search stall"); end
    if (c_ext == 0)    begin failures++; $display("FAIL no external weight fetch"); end
    if (n_skip == 0)   begin failures++; $display("FAIL no zero skip"); end
    if (c_switch < 2)  begin failures++; $display("FAIL mode switches"); end
    if (c_export == 0) begin failures++; $display("FAIL no map export"); end
    if (c_load == 0)   begin failures++; $display("FAIL no map load"); end
    if (c_wb == 0)     begin failures++; $display("FAIL no ofmap write-back"); end
    if (c_drain == 0)  begin failures++; $display("FAIL no drain"); end
    if (c_out == 0)    begin failures++; $display("FAIL no output"); end
    checks += 9;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
