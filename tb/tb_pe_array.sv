// tb_pe_array: accumulates random signed 16x16 tiles times 16-lane vectors with random
// lane-valid patterns and compares every PE's psum with an integer reference; checks
// init loading and the one-cycle update latency.
module tb_pe_array;
  import spocta_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic init, fire;
  logic [15:0][31:0] psum_init, psum;
  logic [15:0] lane_valid;
  logic [15:0][7:0] x;
  logic [15:0][15:0][7:0] w;
  longint r [16];
  pe_array dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    init = 0; fire = 0; psum_init = '0; lane_valid = '0; x = '0; w = '0;
    repeat (2) @(posedge clk); @(negedge clk); rst_n = 1;
    for (int g = 0; g < 20; g++) begin
      init = 1; fire = 0;
      for (int n = 0; n < 16; n++) begin psum_init[n] = $urandom % 1000; r[n] = psum_init[n]; end
      @(negedge clk); init = 0;
      for (int t = 0; t < 10; t++) begin
        fire = 1; lane_valid = (t == 9) ? 16'($urandom) : '1;
        for (int m = 0; m < 16; m++) begin x[m] = 8'($urandom); for (int n = 0; n < 16; n++) w[m][n] = 8'($urandom); end
        for (int n = 0; n < 16; n++) for (int m = 0; m < 16; m++)
          if (lane_valid[m]) r[n] += $signed(x[m]) * $signed(w[m][n]);
        @(negedge clk);
        for (int n = 0; n < 16; n++) begin checks++; if ($signed(psum[n]) != r[n]) begin failures++; $display("FAIL g %0d n %0d", g, n); end end
      end
      fire = 0; @(negedge clk);
      for (int n = 0; n < 16; n++) begin checks++; if ($signed(psum[n]) != r[n]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
