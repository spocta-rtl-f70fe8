// tb_ifmap_mem: random writes of 16-channel feature words with many zero channels, then
// reads; checks the data and that the stored mask marks exactly the nonzero channels.
module tb_ifmap_mem;
  import spocta_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en, rd_en;
  logic [IFM_AW-1:0] wr_addr, rd_addr;
  logic [15:0][7:0] wr_data, rd_data, ref_d [256];
  logic [15:0] rd_mask;
  ifmap_mem dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = '0;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = IFM_AW'(i * 16 + 3);
      for (int c = 0; c < 16; c++) wr_data[c] = ($urandom % 2) ? 8'($urandom) : 8'd0;
      ref_d[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 256; i++) begin
      logic [15:0] m;
      rd_en = 1; rd_addr = IFM_AW'(i * 16 + 3); @(negedge clk); rd_en = 0;
      for (int c = 0; c < 16; c++) m[c] = (ref_d[i][c] != 0);
      checks++;
      if (rd_data != ref_d[i] || rd_mask != m) begin failures++; $display("FAIL word %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
