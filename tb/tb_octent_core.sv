// tb_octent_core: imports random blocks of voxels (dense clusters so windows have many
// neighbours) and reads the Map Table slowly so that the search must stall. The maps
// produced are compared with a brute-force O(n^2) search: for Subm3 every pair of voxels
// at Chebyshev distance <= 1 gives (input, offset, output); for Gconv2 every voxel maps
// to its 2x2x2 parent. Also checks window grouping and 'last' flags, that two blocks run
// back to back, and the direct map-load path.
module tb_octent_core;
  import spocta_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  mode_e mode;
  logic vox_valid, vox_ready, vox_last, blk_done, idle;
  voxel_t vox;
  logic map_ld_valid, map_ld_ready, map_rd_valid, map_rd_pop, mt_empty, mt_stall;
  map_entry_t map_ld_data, map_rd_data;
  int exp_m [int];
  int n_stall = 0, n_got = 0, n_blk = 0;
  octent_core #(.VL_DEPTH(256), .MT_DEPTH(4)) dut (.*);

  initial begin repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge clk) begin
    if (mt_stall) n_stall++;
    if (blk_done) n_blk++;
  end

  function automatic int key(int i, int w, int o); return (i << 20) | (w << 12) | o; endfunction

  // reader: random back-pressure, checks each map against the expected set
  int cur_out = -1; bit in_win = 0;
  always @(negedge clk) begin
    map_rd_pop <= 1'b0;
    if (map_rd_valid && ($urandom % 4 == 0)) begin
      int k;
      map_rd_pop <= 1'b1;
      k = key(map_rd_data.in_idx, map_rd_data.w_idx, map_rd_data.out_idx);
      checks++;
      if (!exp_m.exists(k)) begin failures++; $display("FAIL unexpected map %h", map_rd_data); end
      else begin exp_m[k]--; if (exp_m[k] == 0) exp_m.delete(k); end
      if (mode == M_SUBM3) begin
        checks++;
        if (in_win && map_rd_data.out_idx != 12'(cur_out)) begin failures++; $display("FAIL window split"); end
      end
      in_win = !map_rd_data.last; cur_out = map_rd_data.out_idx;
      n_got++;
    end
  end

  task automatic run_block(mode_e m, int n, int span);
    voxel_t v [$];
    int occ [int];
    mode = m;
    while (v.size() < n) begin
      voxel_t t; int s;
      t.x = 4'($urandom % span); t.y = 4'($urandom % span); t.z = 4'(($urandom % span) + 16 - span);
      s = {t.z, t.y, t.x};
      if (!occ.exists(s)) begin occ[s] = 1; t.idx = 12'(v.size() * 3 + 1); v.push_back(t); end
    end
    foreach (v[a]) foreach (v[b]) begin
      int dx, dy, dz;
      dx = int'(v[a].x) - int'(v[b].x); dy = int'(v[a].y) - int'(v[b].y); dz = int'(v[a].z) - int'(v[b].z);
      if (m == M_SUBM3 && dx >= -1 && dx <= 1 && dy >= -1 && dy <= 1 && dz >= -1 && dz <= 1)
        exp_m[key(v[b].idx, (dx+1) + 3*(dy+1) + 9*(dz+1), v[a].idx)]++;
      if (m == M_GCONV2 && a == 0)
        exp_m[key(v[b].idx, {v[b].z[0], v[b].y[0], v[b].x[0]},
                  {v[b].z[3], v[b].y[3], v[b].x[3], v[b].z[2], v[b].y[2], v[b].x[2],
                   v[b].z[1], v[b].y[1], v[b].x[1]})]++;
    end
    foreach (v[i]) begin
      @(negedge clk);
      vox_valid = 1; vox = v[i]; vox_last = (i == v.size() - 1);
      while (!vox_ready) @(negedge clk);
    end
    @(negedge clk); vox_valid = 0; vox_last = 0;
  endtask

  initial begin
    int t0;
    vox_valid = 0; vox = '0; vox_last = 0; map_ld_valid = 0; map_ld_data = '0; mode = M_SUBM3;
    repeat (2) @(posedge clk); @(negedge clk); rst_n = 1;
    run_block(M_SUBM3, 40, 4);
    run_block(M_SUBM3, 30, 5);
    t0 = 0; while ((exp_m.size() != 0 || !idle) && t0 < 20000) begin @(negedge clk); t0++; end
    checks++; if (exp_m.size() != 0) begin failures++; $display("FAIL %0d Subm3 maps missing", exp_m.size()); end
    checks++; if (n_blk != 2) begin failures++; $display("FAIL blocks %0d", n_blk); end
    run_block(M_GCONV2, 50, 4);
    t0 = 0; while ((exp_m.size() != 0 || !idle) && t0 < 20000) begin @(negedge clk); t0++; end
    checks++; if (exp_m.size() != 0) begin failures++; $display("FAIL %0d Gconv2 maps missing", exp_m.size()); end
    // direct load of maps (Gconv3 / Tconv2 path)
    mode = M_GCONV3;
    for (int i = 0; i < 10; i++) begin
      map_entry_t e; e = map_entry_t'($urandom);
      exp_m[key(e.in_idx, e.w_idx, e.out_idx)]++;
      @(negedge clk); map_ld_valid = 1; map_ld_data = e;
      #1; while (!map_ld_ready) begin @(negedge clk); #1; end
    end
    @(negedge clk); map_ld_valid = 0;
    t0 = 0; while (exp_m.size() != 0 && t0 < 2000) begin @(negedge clk); t0++; end
    checks++; if (exp_m.size() != 0) begin failures++; $display("FAIL %0d loaded maps missing", exp_m.size()); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL search never stalled"); end
    $display("maps=%0d stall_cycles=%0d", n_got, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
