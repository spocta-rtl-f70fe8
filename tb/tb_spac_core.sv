// tb_spac_core: runs the computing core on random layers and compares every exported
// output vector with an integer reference model of the whole path (feature x weight
// accumulation, bias, scale/shift, saturation, ReLU).
//   phase 1: Subm3, output stationary, 2 input chunks x 2 output tiles, weight caching
//            so that mid/up/down tiles of output tile 1 and uncached offsets come from
//            the external responder (random latency);
//   phase 2: Gconv3, input stationary, 4 chunks x 8 tiles (linear layout larger than
//            the weight memory, so some tiles are external); several groups hit the same
//            output, partial sums go back to the ofmap memory, and a drain finishes them.
// Features are ~50% zero; the tb checks that the PE array fires exactly
// ceil(nonzero pairs / 16) times per group (zero skipping), and that external fetches,
// skips, write-backs and the drain all happened.
module tb_spac_core;
  import spocta_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  layer_cfg_t cfg;
  logic job_valid, job_ready, drain_req, drain_done, idle;
  job_t job;
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
  logic [31:0] n_fire, n_ext, n_skip;

  spac_core dut (.*);

  localparam int NIN = 256;
  logic [15:0][7:0] feat [NIN*4];
  int bias [256];
  longint acc [int];          // key: out*16+otile, value index base
  longint accv [int][16];
  int n_exp_fire = 0, n_out = 0, n_wb = 0;
  logic [15:0][7:0] got [int];
  int got_cnt [int];

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
  // where the tile lives for the Subm3 caching configuration of phase 1 (-1: external)
  function automatic int subm_addr(int w, int o, int k);
    int cc; cc = cfg.cin_chunks;
    if (w == 13) return o * cc + k;
    if (w / 9 == 1) return (o < cfg.mid_otiles) ? 256 + (((w < 13) ? w - 9 : w - 10) * cfg.mid_otiles + o) * cc + k : -1;
    if (o >= cfg.ud_otiles) return -1;
    if (w == 22) return 384 + (0 * cfg.ud_otiles + o) * cc + k;
    if (w == 19) return 384 + (1 * cfg.ud_otiles + o) * cc + k;
    if (w == 4)  return 416 + o * cc + k;
    return -1;
  endfunction
  function automatic logic [7:0] pp(longint ps, int b);
    longint v; v = (ps + b) * cfg.pp_scale; v = v >>> cfg.pp_shift;
    if (v > 127) v = 127; if (v < -128) v = -128; if (cfg.pp_relu && v < 0) v = 0;
    return 8'(v);
  endfunction

  // external weight responder with random latency
  int ext_wait = -1;
  always @(negedge clk) begin
    ext_w_valid <= 1'b0;
    if (ext_wait > 0) ext_wait <= ext_wait - 1;
    else if (ext_wait == 0) begin
      ext_w_valid <= 1'b1; ext_w_data <= tile(ext_w_widx, ext_w_otile, ext_w_chunk); ext_wait <= -1;
    end
    if (ext_w_req) ext_wait <= $urandom % 4;
  end
  // output collector
  always @(negedge clk) if (rst_n && out_valid) begin
    int key; key = out_idx * 16 + out_otile;
    got[key] = out_data; n_out++;
    if (got_cnt.exists(key)) got_cnt[key]++; else got_cnt[key] = 1;
    begin logic [15:0] m; for (int n = 0; n < 16; n++) m[n] = out_data[n] != 0;
      checks++; if (out_mask != m) begin failures++; $display("FAIL mask"); end end
  end

  initial begin repeat (400000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic send(input job_t j);
    @(negedge clk);
    while (!job_ready) @(negedge clk);
    job_valid = 1; job = j;
    @(negedge clk); job_valid = 0;
  endtask
  task automatic load_layer();
    for (int i = 0; i < NIN * cfg.cin_chunks; i++) begin
      @(negedge clk); ifm_wr_en = 1; ifm_wr_addr = IFM_AW'(i);
      for (int c = 0; c < 16; c++) feat[i][c] = ($urandom % 2) ? 8'($urandom) : 8'd0;
      if (i % 37 == 5) feat[i] = '0;
      ifm_wr_data = feat[i];
    end
    @(negedge clk); ifm_wr_en = 0;
    for (int w = 0; w < 27; w++) for (int o = 0; o < cfg.cout_tiles; o++) for (int k = 0; k < cfg.cin_chunks; k++) begin
      int a;
      if (cfg.mode == M_SUBM3) a = subm_addr(w, o, k);
      else begin a = (w * cfg.cout_tiles + o) * cfg.cin_chunks + k; if (a >= WM_WORDS) a = -1; end
      if (a >= 0) begin wm_wr_en = 1; wm_wr_addr = WM_AW'(a); wm_wr_data = tile(w, o, k); @(negedge clk); end
    end
    wm_wr_en = 0;
    for (int i = 0; i < 256; i++) begin
      bias_wr_en = 1; bias_wr_addr = 8'(i); bias[i] = int'($urandom % 201) - 100; bias_wr_data = bias[i]; @(negedge clk);
    end
    bias_wr_en = 0;
  endtask
  // one group of jobs: nmaps maps into (out, ot)
  task automatic run_group(int out, int ot, int nmaps);
    int nnz; job_t j; nnz = 0;
    if (!accv.exists(out * 16 + ot)) for (int n = 0; n < 16; n++) accv[out * 16 + ot][n] = 0;
    for (int m = 0; m < nmaps; m++) begin
      int in, w; in = $urandom % NIN; w = $urandom % 27;
      for (int k = 0; k < cfg.cin_chunks; k++) begin
        logic [15:0][15:0][7:0] t; t = tile(w, ot, k);
        for (int c = 0; c < 16; c++) if (feat[in * cfg.cin_chunks + k][c] != 0) begin
          nnz++;
          for (int n = 0; n < 16; n++)
            accv[out * 16 + ot][n] += $signed(feat[in * cfg.cin_chunks + k][c]) * $signed(t[c][n]);
        end
        j = '0; j.in_idx = VID_W'(in); j.w_idx = WIDX_W'(w); j.out_idx = VID_W'(out);
        j.chunk = CH_W'(k); j.otile = CH_W'(ot);
        j.first = (m == 0 && k == 0); j.last = (m == nmaps - 1 && k == cfg.cin_chunks - 1);
        send(j);
      end
    end
    n_exp_fire += (nnz + 15) / 16;
  endtask
  task automatic wait_idle();
    @(negedge clk); while (!idle || !job_ready) @(negedge clk);
    repeat (4) @(negedge clk);
  endtask
  task automatic compare(string tag);
    foreach (accv[key]) begin
      logic [15:0][7:0] e;
      for (int n = 0; n < 16; n++) e[n] = pp(accv[key][n], bias[(key % 16) * 16 + n]);
      checks++;
      if (!got.exists(key)) begin failures++; $display("FAIL %s missing out %0d tile %0d", tag, key / 16, key % 16); end
      else if (got[key] != e || got_cnt[key] != 1) begin failures++; $display("FAIL %s out %0d tile %0d cnt %0d", tag, key / 16, key % 16, got_cnt[key]); end
    end
    checks++;
    if (n_fire != 32'(n_exp_fire)) begin failures++; $display("FAIL %s fires %0d expected %0d", tag, n_fire, n_exp_fire); end
  endtask

  initial begin
    cfg = '0; job_valid = 0; job = '0; drain_req = 0;
    ifm_wr_en = 0; ifm_wr_addr = 0; ifm_wr_data = '0; wm_wr_en = 0; wm_wr_addr = 0; wm_wr_data = '0;
    bias_wr_en = 0; bias_wr_addr = 0; bias_wr_data = 0; ext_w_valid = 0; ext_w_data = '0;
    repeat (2) @(posedge clk); @(negedge clk); rst_n = 1;
    // ---------------- phase 1: Subm3 ----------------
    cfg.mode = M_SUBM3; cfg.cin_chunks = 5'd2; cfg.cout_tiles = 5'd2; cfg.mid_otiles = 5'd1; cfg.ud_otiles = 5'd1;
    cfg.n_up = 4'd2; cfg.up_list[0] = 5'd22; cfg.up_list[1] = 5'd19; cfg.n_down = 4'd1; cfg.down_list[0] = 5'd4;
    cfg.pp_scale = 16'sd1; cfg.pp_shift = 5'd7; cfg.pp_relu = 1'b1;
    load_layer();
    for (int out = 0; out < 40; out++) for (int ot = 0; ot < 2; ot++) run_group(out, ot, 1 + $urandom % 6);
    wait_idle();
    compare("subm3");
    $display("phase1: outputs=%0d fires=%0d ext=%0d skipped=%0d", n_out, n_fire, n_ext, n_skip);
    checks++; if (n_ext == 0 || n_skip == 0) begin failures++; $display("FAIL no ext fetch / skip"); end
    // ---------------- phase 2: Gconv3 input stationary + drain ----------------
    accv.delete(); got.delete(); got_cnt.delete();
    cfg.mode = M_GCONV3; cfg.cin_chunks = 5'd4; cfg.cout_tiles = 5'd8;
    cfg.pp_scale = 16'sd3; cfg.pp_shift = 5'd9; cfg.pp_relu = 1'b0;
    load_layer();
    begin
      int n0, e0; n0 = n_out; e0 = n_ext;
      for (int g = 0; g < 120; g++) run_group($urandom % 24, $urandom % 8, 1 + $urandom % 2);
      wait_idle();
      checks++; if (n_out != n0) begin failures++; $display("FAIL IS outputs before drain"); end
      @(negedge clk); drain_req = 1;
      while (!drain_done) @(negedge clk);
      drain_req = 0;
      wait_idle();
      compare("gconv3");
      checks++; if (n_ext == e0) begin failures++; $display("FAIL no ext fetch in linear layout"); end
      $display("phase2: outputs=%0d fires=%0d ext=%0d skipped=%0d", n_out - n0, n_fire, n_ext - e0, n_skip);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
