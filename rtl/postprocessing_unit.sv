// postprocessing_unit: turns 16 finished 32-bit psums into 8-bit output features:
// y = sat8(((psum + bias[c]) * scale) >>> shift), followed by ReLU when enabled, where c
// is the output channel (otile*16 + lane). This covers batch normalisation folded into a
// per-channel bias and a layer scale, requantisation and activation. The bias table
// (256 channels) is written through bias_wr_*. One register stage; tag travels along.
// That the unit does activation, batch norm and quantisation is the paper's; the
// formula, the table and the latency are this design's choices.
module postprocessing_unit
  import spocta_pkg::*;
#(
  parameter int TAG_W = VID_W + CH_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  layer_cfg_t                  cfg,
  input  logic                        bias_wr_en,
  input  logic [7:0]                  bias_wr_addr,
  input  logic [PSW-1:0]              bias_wr_data,
  input  logic                        in_valid,
  input  logic [CH_W-1:0]             in_otile,
  input  logic [NPE-1:0][PSW-1:0]     in_psum,
  input  logic [TAG_W-1:0]            in_tag,
  output logic                        out_valid,
  output logic [NPE-1:0][DW-1:0]      out_data,
  output logic [TAG_W-1:0]            out_tag
);
  logic [PSW-1:0] bias [256];

  always_ff @(posedge clk) if (bias_wr_en) bias[bias_wr_addr] <= bias_wr_data;

  function automatic logic [DW-1:0] pp1(input logic signed [PSW-1:0] ps,
                                        input logic signed [PSW-1:0] b,
                                        input logic signed [15:0] sc,
                                        input logic [4:0] sh, input logic relu);
    logic signed [PSW+16:0] v;
    v = (PSW+17)'(signed'(ps) + signed'(b)) * (PSW+17)'(sc);
    v = v >>> sh;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    if (relu && v < 0) v = 0;
    return DW'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_data <= '0; out_tag <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_tag <= in_tag;
        for (int n = 0; n < NPE; n++)
          out_data[n] <= pp1(in_psum[n], bias[{in_otile, 4'(n)}], cfg.pp_scale,
                             cfg.pp_shift, cfg.pp_relu);
      end
    end
  end
endmodule
