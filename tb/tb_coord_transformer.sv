// tb_coord_transformer: drives random block-local coordinates and checks the octree code
// one cycle later against an independent bit-by-bit interleaving (phi_l = z_l*4+y_l*2+x_l).
module tb_coord_transformer;
  import spocta_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, out_valid;
  voxel_t in_vox, out_vox, prev;
  logic [2:0] out_phi1;
  logic [TADDR_W-1:0] out_addr;
  coord_transformer dut (.*);
  initial begin repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int exp_p, exp_a;
    in_valid = 0; in_vox = '0;
    repeat (2) @(posedge clk); @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      in_valid = 1; in_vox = voxel_t'($urandom);
      @(posedge clk); #1;
      exp_p = in_vox.z[0]*4 + in_vox.y[0]*2 + in_vox.x[0];
      exp_a = 0;
      for (int l = 1; l < 4; l++) exp_a += (in_vox.z[l]*4 + in_vox.y[l]*2 + in_vox.x[l]) << (3*(l-1));
      checks++;
      if (!out_valid || out_phi1 != 3'(exp_p) || out_addr != 9'(exp_a) || out_vox != in_vox) begin
        failures++; $display("FAIL vox=%h phi1=%0d/%0d addr=%0d/%0d", in_vox, out_phi1, exp_p, out_addr, exp_a);
      end
    end
    @(negedge clk); in_valid = 0; @(posedge clk); #1;
    checks++; if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
