// tb_data_buffer: pushes random gathered pair counts (0..16) and pops random lane
// subsets; a reference model of the 16 rotating lane FIFOs checks heads, lane-valid,
// in_ready (back-pressure) and that every pushed pair comes out once, in order.
module tb_data_buffer;
  import spocta_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_bp = 0;
  logic in_valid, in_ready, empty;
  logic [4:0] in_cnt;
  logic [15:0][7:0] in_x, hx;
  logic [15:0][15:0][7:0] in_w, hw;
  logic [15:0] lane_valid, pop;
  logic [7:0] qx [16][$];
  logic [127:0] qw [16][$];
  int wp = 0;
  data_buffer #(.DEPTH(4)) dut (.*);
  initial begin repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    in_valid = 0; in_cnt = 0; in_x = '0; in_w = '0; pop = '0;
    repeat (2) @(posedge clk); @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      in_valid = ($urandom % 4) != 0; in_cnt = 5'($urandom % 17);
      for (int j = 0; j < 16; j++) begin in_x[j] = 8'($urandom); in_w[j] = {$urandom, $urandom, $urandom, $urandom}; end
      pop = (t > 2500) ? '1 : 16'($urandom);
      #1;
      // check heads against model before the edge
      for (int l = 0; l < 16; l++) begin
        checks++;
        if (lane_valid[l] != (qx[l].size() > 0)) begin failures++; $display("FAIL lane_valid %0d t %0d", l, t); end
        else if (lane_valid[l] && (hx[l] != qx[l][0] || hw[l] != qw[l][0])) begin failures++; $display("FAIL head %0d", l); end
      end
      begin
        bit full; full = 0;
        for (int l = 0; l < 16; l++) if (qx[l].size() == 4) full = 1;
        checks++; if (in_ready != !full) failures++;
        if (in_valid && full) n_bp++;
      end
      @(posedge clk);
      for (int l = 0; l < 16; l++) if (pop[l] && qx[l].size() > 0) begin void'(qx[l].pop_front()); void'(qw[l].pop_front()); end
      if (in_valid && in_ready) begin
        for (int j = 0; j < int'(in_cnt); j++) begin qx[(wp + j) % 16].push_back(in_x[j]); qw[(wp + j) % 16].push_back(in_w[j]); end
        wp = (wp + in_cnt) % 16;
      end
      @(negedge clk);
    end
    checks++; if (!empty) failures++;
    if (n_bp == 0) begin failures++; $display("FAIL back-pressure never happened"); end
    $display("backpressure=%0d", n_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
