// tb_voxel_list_fifo: fills the FIFO to full with random voxels, checks full/empty and
// that the voxels come out in the order written, with interleaved push and pop.
module tb_voxel_list_fifo;
  import spocta_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic push, pop, empty, full;
  voxel_t din, dout;
  voxel_t q[$];
  voxel_list_fifo #(.DEPTH(32)) dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    push = 0; pop = 0; din = '0;
    repeat (2) @(posedge clk); @(negedge clk); rst_n = 1;
    @(negedge clk); checks++; if (!empty || full) failures++;
    for (int i = 0; i < 32; i++) begin
      push = 1; din = voxel_t'($urandom); q.push_back(din); @(negedge clk);
    end
    push = 0; checks++; if (!full) begin failures++; $display("FAIL not full"); end
    for (int t = 0; t < 2000; t++) begin
      push = ($urandom % 2) && !full;
      pop  = ($urandom % 2) && !empty;
      din  = voxel_t'($urandom);
      if (pop) begin
        checks++;
        if (dout != q[0]) begin failures++; $display("FAIL order %h %h", dout, q[0]); end
        void'(q.pop_front());
      end
      if (push) q.push_back(din);
      @(negedge clk);
    end
    push = 0;
    while (!empty) begin
      pop = 1; checks++; if (dout != q[0]) failures++; void'(q.pop_front()); @(negedge clk);
    end
    pop = 0; checks++; if (q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
