// tb_search_filter: random hit patterns and write pointers; checks that the valid results
// land, in bank order, in FIFOs wr_ptr, wr_ptr+1, ... (mod 8), that the last one carries
// the window-end flag, and the Gconv2 rule that only the lowest-phi1 voxel emits.
module tb_search_filter;
  import spocta_pkg::*;
  int checks = 0, failures = 0;
  logic res_valid;
  logic [7:0] hit, wr_en;
  logic [7:0][VID_W-1:0] idx;
  qmeta_t meta;
  logic [2:0] wr_ptr;
  map_entry_t [7:0] wr_data;
  logic [3:0] n_valid;
  search_filter dut (.*);
  initial begin
    for (int t = 0; t < 2000; t++) begin
      int k; bit keep;
      res_valid = ($urandom % 8) != 0;
      hit = 8'($urandom); wr_ptr = 3'($urandom);
      for (int b = 0; b < 8; b++) idx[b] = 12'($urandom);
      meta = qmeta_t'({$urandom, $urandom, $urandom});
      meta.mode = (t % 2) ? M_GCONV2 : M_SUBM3;
      #1;
      keep = res_valid;
      if (meta.mode == M_GCONV2) for (int b = 0; b < 8; b++) if (hit[b] && b < meta.center_phi1) keep = 0;
      k = 0;
      for (int b = 0; b < 8; b++) if (keep && hit[b]) begin
        int s; s = (wr_ptr + k) % 8;
        checks++;
        if (!wr_en[s] || wr_data[s].in_idx != idx[b] || wr_data[s].w_idx != meta.w_idx[b] ||
            wr_data[s].out_idx != meta.out_idx) begin
          failures++; $display("FAIL t=%0d bank %0d slot %0d", t, b, s);
        end
        k++;
        checks++;
        if (wr_data[s].last != ((k == $countones(hit)) && meta.last)) begin failures++; $display("FAIL last"); end
      end
      checks++;
      if ($countones(wr_en) != k || n_valid != 4'(k)) begin failures++; $display("FAIL count %0d %0d", n_valid, k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
