// tb_ofmap_arranger: sends random final and non-final accumulator results; checks
// that non-final ones become ofmap-memory writes at out_idx*cout_tiles+otile, final
// ones go to the postprocessing input with their tag, and that postprocessed words
// leave one cycle later with the right index, tile, data and nonzero mask.
module tb_ofmap_arranger;
  import spocta_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, nw = 0;
  layer_cfg_t cfg;
  logic acc_valid, acc_final, ofm_wr_en, pp_in_valid, pp_out_valid, ext_wr_valid;
  logic [15:0][31:0] acc_psum, ofm_wr_data, pp_in_psum;
  logic [11:0] acc_out_idx, ext_wr_out_idx;
  logic [3:0] acc_otile, pp_in_otile, ext_wr_otile;
  logic [9:0] ofm_wr_addr;
  logic [15:0] pp_in_tag, pp_out_tag, ext_wr_mask, emask;
  logic [15:0][7:0] pp_out_data, ext_wr_data;
  logic [31:0] n_written;
  ofmap_arranger dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    cfg = '0; cfg.cout_tiles = 5'd3;
    acc_valid = 0; acc_final = 0; acc_psum = '0; acc_out_idx = 0; acc_otile = 0;
    pp_out_valid = 0; pp_out_data = '0; pp_out_tag = 0;
    repeat (2) @(posedge clk); @(negedge clk); rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      acc_valid = $urandom % 2; acc_final = $urandom % 2;
      acc_out_idx = 12'($urandom % 300); acc_otile = 4'($urandom % 3);
      for (int n = 0; n < 16; n++) acc_psum[n] = $urandom;
      pp_out_valid = $urandom % 2; pp_out_tag = 16'($urandom);
      for (int n = 0; n < 16; n++) begin pp_out_data[n] = ($urandom % 3 == 0) ? 8'd0 : 8'($urandom); emask[n] = pp_out_data[n] != 0; end
      #1;
      checks++;
      if (ofm_wr_en != (acc_valid && !acc_final) || pp_in_valid != (acc_valid && acc_final)) failures++;
      if (ofm_wr_en) begin checks++; if (ofm_wr_addr != 10'(acc_out_idx * 3 + acc_otile) || ofm_wr_data != acc_psum) failures++; end
      if (pp_in_valid) begin checks++; if (pp_in_psum != acc_psum || pp_in_otile != acc_otile || pp_in_tag != {acc_out_idx, acc_otile}) failures++; end
      @(negedge clk);
      checks++;
      if (ext_wr_valid != pp_out_valid) failures++;
      else if (pp_out_valid) begin
        nw++;
        checks++;
        if ({ext_wr_out_idx, ext_wr_otile} != pp_out_tag || ext_wr_data != pp_out_data || ext_wr_mask != emask) begin failures++; $display("FAIL export t %0d", t); end
      end
    end
    checks++; if (n_written != 32'(nw)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
