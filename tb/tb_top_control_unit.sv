// tb_top_control_unit: feeds windows of maps (Subm3: several maps ending with 'last';
// Gconv3: single maps) with random gaps, accepts jobs with random back-pressure, and
// compares the job stream with the expected replay order (output tile, then map, then
// input chunk) including first/last flags. Also checks the Gconv2 export of swapped
// maps, and the end-of-layer sequence: drain request in input-stationary mode, done.
module tb_top_control_unit;
  import spocta_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  layer_cfg_t cfg;
  logic map_valid, map_pop, maps_empty, search_idle, job_valid, job_ready, drain_req, drain_done;
  logic spac_idle, layer_end, done, map_exp_valid;
  map_entry_t map_data, map_exp_data;
  job_t job;
  logic [31:0] n_windows;
  map_entry_t mq [$];
  job_t exp_j [$];
  int n_exp_win = 0, n_export = 0, n_drain = 0;
  top_control_unit dut (.*);
  initial begin repeat (100000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // map source and job sink, driven at negedge
  always @(negedge clk) begin
    drain_done = drain_req && ($urandom % 8 == 0);
    map_valid = 0;
    if (mq.size() > 0 && ($urandom % 3 != 0)) begin map_valid = 1; map_data = mq[0]; end
    maps_empty = mq.size() == 0;
    job_ready = $urandom % 2;
    #1;
    // what is seen now is taken at the next rising edge
    if (map_pop) void'(mq.pop_front());
    if (job_valid && job_ready) begin
      checks++;
      if (exp_j.size() == 0 || job != exp_j[0]) begin failures++; $display("FAIL job %p", job); end
      if (exp_j.size() > 0) void'(exp_j.pop_front());
    end
    if (map_exp_valid) begin
      n_export++; checks++;
      if (map_exp_data.in_idx != map_data.out_idx || map_exp_data.out_idx != map_data.in_idx || !map_exp_data.last) failures++;
    end
    if (drain_req) n_drain++;
  end
  task automatic add_window(int nm, bit is_mode);
    map_entry_t w [$];
    for (int i = 0; i < nm; i++) begin
      map_entry_t e; e.in_idx = 12'($urandom); e.w_idx = 5'($urandom % 27); e.out_idx = 12'($urandom);
      e.last = (i == nm - 1); w.push_back(e); mq.push_back(e);
    end
    n_exp_win++;
    for (int ot = 0; ot < cfg.cout_tiles; ot++) foreach (w[i]) for (int k = 0; k < cfg.cin_chunks; k++) begin
      job_t j; j = '0;
      j.in_idx = w[i].in_idx; j.w_idx = w[i].w_idx; j.out_idx = w[i].out_idx; j.chunk = 4'(k); j.otile = 4'(ot);
      j.first = (i == 0 && k == 0); j.last = (i == w.size() - 1 && k == cfg.cin_chunks - 1);
      exp_j.push_back(j);
    end
  endtask
  task automatic end_layer(bit is_mode);
    int t0; n_drain = 0;
    while (exp_j.size() > 0) @(negedge clk);
    layer_end = 1; t0 = 0;
    while (!done && t0 < 2000) begin @(negedge clk); t0++; end
    checks++; if (!done) begin failures++; $display("FAIL no done"); end
    checks++; if (is_mode != (n_drain > 0)) begin failures++; $display("FAIL drain %0d", n_drain); end
    layer_end = 0; repeat (2) @(negedge clk);
  endtask
  initial begin
    cfg = '0; map_valid = 0; map_data = '0; maps_empty = 1; search_idle = 1; job_ready = 0;
    drain_done = 0; spac_idle = 1; layer_end = 0;
    repeat (2) @(posedge clk); @(negedge clk); rst_n = 1;
    cfg.mode = M_SUBM3; cfg.cin_chunks = 5'd2; cfg.cout_tiles = 5'd3;
    for (int i = 0; i < 30; i++) add_window(1 + $urandom % 27, 0);
    end_layer(0);
    cfg.mode = M_GCONV2; cfg.cin_chunks = 5'd1; cfg.cout_tiles = 5'd2;
    for (int i = 0; i < 20; i++) add_window(1 + $urandom % 8, 0);
    end_layer(0);
    checks++; if (n_export == 0) failures++;
    cfg.mode = M_GCONV3; cfg.cin_chunks = 5'd3; cfg.cout_tiles = 5'd1;
    for (int i = 0; i < 40; i++) add_window(1, 1);
    end_layer(1);
    checks++; if (n_windows != 32'(n_exp_win)) begin failures++; $display("FAIL windows %0d", n_windows); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
