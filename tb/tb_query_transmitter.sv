// tb_query_transmitter: feeds voxels through a modelled Voxel List FIFO, with random
// stalls, and rebuilds every query: from (bank, address) it recovers the neighbour
// coordinate and checks that the queries of a Subm3 voxel are exactly its in-block
// 3x3x3 neighbours, each once, with the right weight index, in 8 query cycles, 'last'
// on the final one; for Gconv2 one cycle with the 8 children of the voxel's parent.
module tb_query_transmitter;
  import spocta_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  mode_e mode;
  logic fifo_empty, fifo_pop, stall, q_valid, busy;
  voxel_t fifo_dout;
  logic [7:0] q_en;
  logic [7:0][TADDR_W-1:0] q_addr;
  qmeta_t q_meta;
  voxel_t q[$];
  voxel_t cur;
  int seen [27];
  int ncyc, nq;
  query_transmitter dut (.*);
  // the FIFO outputs are refreshed by hand after every change of the queue
  task automatic upd();
    fifo_empty = (q.size() == 0);
    fifo_dout  = fifo_empty ? voxel_t'(0) : q[0];
  endtask

  initial begin repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic int expected_nb(voxel_t v);
    int c = 0;
    for (int dz = -1; dz <= 1; dz++) for (int dy = -1; dy <= 1; dy++) for (int dx = -1; dx <= 1; dx++)
      if (int'(v.x)+dx >= 0 && int'(v.x)+dx < 16 && int'(v.y)+dy >= 0 && int'(v.y)+dy < 16 &&
          int'(v.z)+dz >= 0 && int'(v.z)+dz < 16) c++;
    return c;
  endfunction

  task automatic finish_voxel(voxel_t v);
    int exp_cnt;
    exp_cnt = (mode == M_SUBM3) ? expected_nb(v) : 8;
    checks++;
    if (nq != exp_cnt) begin failures++; $display("FAIL voxel %h: %0d queries, expected %0d", v, nq, exp_cnt); end
    checks++;
    if (ncyc != ((mode == M_SUBM3) ? 8 : 1)) begin failures++; $display("FAIL cycles %0d", ncyc); end
  endtask

  task automatic run(mode_e m, int nvox);
    bit started, pop_now;
    mode = m; started = 0;
    for (int i = 0; i < nvox; i++) q.push_back(voxel_t'($urandom));
    while (q.size() != 0 || busy) begin
      @(negedge clk);
      stall = ($urandom % 5 == 0);
      upd();
      #1;
      if (q_valid) begin
        ncyc++;
        for (int b = 0; b < 8; b++) if (q_en[b]) begin
          int x, y, z, dx, dy, dz, w;
          x = b[0]; y = b[1]; z = b[2];
          for (int l = 1; l < 4; l++) begin
            x += q_addr[b][3*(l-1)] << l; y += q_addr[b][3*(l-1)+1] << l; z += q_addr[b][3*(l-1)+2] << l;
          end
          if (m == M_SUBM3) begin
            dx = int'(cur.x) - x; dy = int'(cur.y) - y; dz = int'(cur.z) - z;
            w = (dx+1) + 3*(dy+1) + 9*(dz+1);
            checks++;
            if (dx < -1 || dx > 1 || dy < -1 || dy > 1 || dz < -1 || dz > 1 ||
                q_meta.w_idx[b] != 5'(w) || seen[w] != 0 || q_meta.out_idx != cur.idx) begin
              failures++; $display("FAIL query bank %0d (%0d,%0d,%0d) for %h dut %h w=%0d addr %h t=%0t", b, x, y, z, cur, dut.cur, q_meta.w_idx[b], q_addr[b], $time);
            end
            if (w >= 0 && w < 27) seen[w] = 1;
          end else begin
            checks++;
            if ((x >> 1) != (cur.x >> 1) || (y >> 1) != (cur.y >> 1) || (z >> 1) != (cur.z >> 1) ||
                q_meta.w_idx[b] != 5'(b)) begin
              failures++; $display("FAIL gconv2 query bank %0d", b);
            end
          end
          nq++;
        end
        checks++;
        if (q_meta.last != (ncyc == ((m == M_SUBM3) ? 8 : 1))) begin failures++; $display("FAIL last flag"); end
      end
      pop_now = fifo_pop;
      @(posedge clk); #1;
      if (pop_now) begin
        if (started) finish_voxel(cur);
        started = 1;
        cur = q.pop_front(); ncyc = 0; nq = 0; upd();
        foreach (seen[i]) seen[i] = 0;
      end
    end
    if (started) finish_voxel(cur);
  endtask

  initial begin
    stall = 0; mode = M_SUBM3; upd();
    repeat (2) @(posedge clk); @(negedge clk); rst_n = 1;
    run(M_SUBM3, 60);
    // corner voxels
    q.push_back('{x:0, y:0, z:0, idx:1}); q.push_back('{x:15, y:15, z:15, idx:2});
    run(M_SUBM3, 0);
    run(M_GCONV2, 60);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
