// tb_octree_table: writes random voxel indices at random (bank, address) sites, then
// reads all 8 banks in parallel at random addresses and compares hit and index with a
// reference array; finally checks that clr removes every entry.
module tb_octree_table;
  import spocta_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clr, wr_en;
  logic [2:0] wr_bank;
  logic [TADDR_W-1:0] wr_addr;
  logic [VID_W-1:0] wr_idx;
  logic [7:0] rd_en, rd_hit;
  logic [7:0][TADDR_W-1:0] rd_addr;
  logic [7:0][VID_W-1:0] rd_idx;
  int ref_v [8][512];
  int ref_i [8][512];
  octree_table dut (.*);
  initial begin repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    clr = 0; wr_en = 0; rd_en = 0; rd_addr = '0; wr_bank = 0; wr_addr = 0; wr_idx = 0;
    foreach (ref_v[b, a]) begin ref_v[b][a] = 0; ref_i[b][a] = 0; end
    repeat (2) @(posedge clk); @(negedge clk); rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      @(negedge clk);
      wr_en = 1; wr_bank = 3'($urandom); wr_addr = 9'($urandom); wr_idx = 12'($urandom);
      ref_v[wr_bank][wr_addr] = 1; ref_i[wr_bank][wr_addr] = wr_idx;
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 400; t++) begin
      logic [7:0][TADDR_W-1:0] a;
      logic [7:0] en;
      @(negedge clk);
      en = 8'($urandom); a = {8{9'($urandom)}};
      for (int b = 0; b < 8; b++) a[b] = 9'($urandom);
      rd_en = en; rd_addr = a;
      @(negedge clk); rd_en = 0;
      for (int b = 0; b < 8; b++) begin
        checks++;
        if (rd_hit[b] != (en[b] && ref_v[b][a[b]] == 1) ||
            (en[b] && ref_v[b][a[b]] == 1 && rd_idx[b] != 12'(ref_i[b][a[b]]))) begin
          failures++; $display("FAIL bank %0d addr %0d", b, a[b]);
        end
      end
    end
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int t = 0; t < 64; t++) begin
      rd_en = '1; for (int b = 0; b < 8; b++) rd_addr[b] = 9'(t*8 + b);
      @(negedge clk); checks++; if (rd_hit != 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
