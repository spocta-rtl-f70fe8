// tb_gather_unit: random features, masks and tiles; checks that the kept pairs are the
// masked channels in order, with their own weight columns, and that the rest is zero.
module tb_gather_unit;
  import spocta_pkg::*;
  int checks = 0, failures = 0;
  logic in_valid;
  logic [15:0][7:0] x, gx;
  logic [15:0] mask;
  logic [15:0][15:0][7:0] wtile, gw;
  logic [4:0] out_cnt;
  gather_unit dut (.*);
  initial begin
    for (int t = 0; t < 500; t++) begin
      int k;
      in_valid = 1; mask = 16'($urandom);
      if (t % 50 == 0) mask = '1;
      for (int m = 0; m < 16; m++) begin x[m] = 8'($urandom); for (int n = 0; n < 16; n++) wtile[m][n] = 8'($urandom); end
      #1;
      k = 0;
      for (int m = 0; m < 16; m++) if (mask[m]) begin
        checks++;
        if (gx[k] != x[m] || gw[k] != wtile[m]) begin failures++; $display("FAIL t %0d m %0d", t, m); end
        k++;
      end
      checks++;
      if (out_cnt != 5'(k)) failures++;
      for (int j = k; j < 16; j++) begin checks++; if (gx[j] != 0 || gw[j] != 0) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
