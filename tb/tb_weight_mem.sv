// tb_weight_mem: writes a distinct random tile into every word of all four partitions
// and reads them back in a shuffled order.
module tb_weight_mem;
  import spocta_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en, rd_en;
  logic [WM_AW-1:0] wr_addr, rd_addr;
  logic [15:0][15:0][7:0] wr_data, rd_data;
  logic [15:0][15:0][7:0] ref_d [WM_WORDS];
  weight_mem dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = '0;
    for (int i = 0; i < WM_WORDS; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = WM_AW'(i);
      for (int k = 0; k < 64; k++) wr_data[k/4][(k%4)*4 +: 4] = {$urandom, $urandom, $urandom, $urandom};
      ref_d[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int j = 0; j < WM_WORDS; j++) begin
      int i; i = (j * 97) % WM_WORDS;
      rd_en = 1; rd_addr = WM_AW'(i); @(negedge clk); rd_en = 0;
      checks++; if (rd_data != ref_d[i]) begin failures++; $display("FAIL word %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
