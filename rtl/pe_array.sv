// pe_array: 16 PEs, each with 16 signed 8x8 multipliers, an adder tree and a 32-bit
// accumulator: one (16x16)x(16x1) matrix-vector product per cycle. Lane m carries one
// feature x[m] and its weight column w[m][0..15]; PE n adds sum_m x[m]*w[m][n] to psum[n]
// when fire is high. Lanes with lane_valid low contribute zero, for the partly filled
// last vector of a window. init loads psum_init, which is zero for a new output-stationary
// window or the stored partial sum of an input-stationary output (Switch 2, configurable
// psum reuse). Registered: psum shows the update one cycle after fire. Array size is the
// paper's; the accumulator width and init port are this design's choices.
module pe_array
  import spocta_pkg::*;
(
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               init,
  input  logic [NPE-1:0][PSW-1:0]            psum_init,
  input  logic                               fire,
  input  logic [LANES-1:0]                   lane_valid,
  input  logic [LANES-1:0][DW-1:0]           x,
  input  logic [LANES-1:0][NPE-1:0][DW-1:0]  w,
  output logic [NPE-1:0][PSW-1:0]            psum
);
  logic [NPE-1:0][PSW-1:0] dot;

  always_comb begin
    for (int n = 0; n < NPE; n++) begin
      logic signed [PSW-1:0]  s;
      logic signed [2*DW-1:0] p;
      s = '0;
      for (int m = 0; m < LANES; m++) begin
        p = $signed(x[m]) * $signed(w[m][n]);
        if (lane_valid[m]) s += PSW'(p);
      end
      dot[n] = s;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) psum <= '0;
    else if (init) psum <= psum_init;
    else if (fire)
      for (int n = 0; n < NPE; n++) psum[n] <= psum[n] + dot[n];
  end
endmodule
