// tb_ofmap_mem: writes psum words, checks read data and valid bits, clears some words
// and checks that only those lose their valid bit.
module tb_ofmap_mem;
  import spocta_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en, clr_en, rd_en, rd_valid;
  logic [OFM_AW-1:0] wr_addr, clr_addr, rd_addr;
  logic [15:0][31:0] wr_data, rd_data;
  logic [15:0][31:0] ref_d [OFM_WORDS];
  bit ref_v [OFM_WORDS];
  ofmap_mem dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    wr_en = 0; clr_en = 0; rd_en = 0; wr_addr = 0; clr_addr = 0; rd_addr = 0; wr_data = '0;
    foreach (ref_v[i]) ref_v[i] = 0;
    repeat (2) @(posedge clk); @(negedge clk); rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      wr_en = 1; wr_addr = OFM_AW'($urandom);
      for (int c = 0; c < 16; c++) wr_data[c] = $urandom;
      ref_d[wr_addr] = wr_data; ref_v[wr_addr] = 1;
      @(negedge clk);
    end
    wr_en = 0;
    for (int i = 0; i < 200; i++) begin
      clr_en = 1; clr_addr = OFM_AW'($urandom); ref_v[clr_addr] = 0; @(negedge clk);
    end
    clr_en = 0;
    for (int i = 0; i < OFM_WORDS; i++) begin
      rd_en = 1; rd_addr = OFM_AW'(i); @(negedge clk); rd_en = 0;
      checks++;
      if (rd_valid != ref_v[i] || (ref_v[i] && rd_data != ref_d[i])) begin failures++; $display("FAIL word %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
