// tb_postprocessing_unit: loads a random bias table and pushes random psum words with
// random scale/shift/ReLU settings; compares the 8-bit outputs with a reference
// (bias add, multiply, arithmetic shift, saturation, optional ReLU) one cycle later.
module tb_postprocessing_unit;
  import spocta_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  layer_cfg_t cfg;
  logic bias_wr_en, in_valid, out_valid;
  logic [7:0] bias_wr_addr;
  logic [31:0] bias_wr_data;
  logic [3:0] in_otile;
  logic [15:0][31:0] in_psum;
  logic [15:0] in_tag, out_tag;
  logic [15:0][7:0] out_data, exp_d;
  logic [15:0] exp_tag;
  int bias [256];
  postprocessing_unit dut (.*);
  function automatic logic [7:0] ref1(int ps, int b, int sc, int sh, bit relu);
    longint v; v = (longint'(ps) + b) * sc; v = v >>> sh;
    if (v > 127) v = 127; if (v < -128) v = -128; if (relu && v < 0) v = 0;
    return 8'(v);
  endfunction
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    cfg = '0; bias_wr_en = 0; bias_wr_addr = 0; bias_wr_data = 0; in_valid = 0; in_otile = 0; in_psum = '0; in_tag = 0;
    repeat (2) @(posedge clk); @(negedge clk); rst_n = 1;
    for (int i = 0; i < 256; i++) begin
      bias_wr_en = 1; bias_wr_addr = 8'(i); bias_wr_data = 32'(int'($urandom % 2001) - 1000); bias[i] = bias_wr_data;
      @(negedge clk);
    end
    bias_wr_en = 0;
    for (int t = 0; t < 1000; t++) begin
      cfg.pp_scale = 16'($urandom % 600); cfg.pp_shift = 5'($urandom % 16); cfg.pp_relu = $urandom % 2;
      in_valid = 1; in_otile = 4'($urandom); in_tag = 16'($urandom);
      for (int n = 0; n < 16; n++) begin
        in_psum[n] = 32'(int'($urandom % 200001) - 100000);
        exp_d[n] = ref1(in_psum[n], bias[{in_otile, 4'(n)}], cfg.pp_scale, cfg.pp_shift, cfg.pp_relu);
      end
      exp_tag = in_tag;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_data != exp_d || out_tag != exp_tag) begin failures++; $display("FAIL t %0d", t); end
      @(negedge clk);
      checks++; if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
