// tb_map_table: writes batches of maps as the Search Filter would (rotated by wr_ptr),
// plus direct loads, and reads by polling while random back-pressure applies; the maps
// must come out in the exact order written, and almost_full must rise before overflow.
module tb_map_table;
  import spocta_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [7:0] wr_en;
  map_entry_t [7:0] wr_data;
  logic [2:0] wr_ptr;
  logic ld_valid, ld_ready, rd_valid, rd_pop, almost_full, all_empty;
  map_entry_t ld_data, rd_data;
  map_entry_t q[$];
  int n_af = 0;
  map_table #(.DEPTH(8)) dut (.*);
  initial begin repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    wr_en = 0; wr_data = '0; ld_valid = 0; ld_data = '0; rd_pop = 0;
    repeat (2) @(posedge clk); @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      wr_en = '0; ld_valid = 0;
      if (almost_full) n_af++;
      if (!almost_full && t < 2500) begin
        if ($urandom % 4 == 0) begin
          ld_valid = 1; ld_data = map_entry_t'($urandom);
        end else begin
          int k; k = $urandom % 9;
          for (int j = 0; j < k; j++) begin
            map_entry_t m; m = map_entry_t'($urandom);
            wr_en[(wr_ptr + j) % 8] = 1; wr_data[(wr_ptr + j) % 8] = m; q.push_back(m);
          end
        end
      end
      rd_pop = rd_valid && ($urandom % 3 != 0);
      #1;
      if (ld_valid && ld_ready) q.push_back(ld_data);
      if (rd_pop) begin
        checks++;
        if (q.size() == 0 || rd_data != q[0]) begin failures++; $display("FAIL order t=%0d", t); end
        else void'(q.pop_front());
      end
    end
    checks++; if (n_af == 0) begin failures++; $display("FAIL almost_full never"); end
    @(negedge clk); wr_en = '0; ld_valid = 0;
    while (rd_valid) begin rd_pop = 1; #1; checks++; if (rd_data != q[0]) failures++; void'(q.pop_front()); @(negedge clk); end
    rd_pop = 0;
    checks++; if (q.size() != 0 || !all_empty) begin failures++; $display("FAIL leftover %0d", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
