// ofmap_arranger: the output side of the SPAC core. It judges whether the accumulation
// of an output is finished: a psum vector with acc_final low is a partial sum of an
// input-stationary layer and is written back to the Ofmap Mem; one with acc_final high
// is sent through the Postprocessing Unit. For each postprocessed 16-channel result it
// builds the nonzero mask (the sparsity of the next layer's ifmap, per 16 output channels
// as the Gather Unit consumes them) and issues the write request to external memory
// (ext_wr_*, registered, no back-pressure). It also counts finished outputs. Function
// from the paper; the interfaces are this design's choices. The psum vector itself is
// routed, not transformed, to both the Ofmap Mem write port and the postprocessing input;
// only the valid strobes, the address and the tag are computed here (combinational).
module ofmap_arranger
  import spocta_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  layer_cfg_t                  cfg,
  input  logic                        acc_valid,
  input  logic                        acc_final,
  input  logic [NPE-1:0][PSW-1:0]     acc_psum,
  input  logic [VID_W-1:0]            acc_out_idx,
  input  logic [CH_W-1:0]             acc_otile,
  output logic                        ofm_wr_en,
  output logic [OFM_AW-1:0]           ofm_wr_addr,
  output logic [NPE-1:0][PSW-1:0]     ofm_wr_data,
  output logic                        pp_in_valid,
  output logic [NPE-1:0][PSW-1:0]     pp_in_psum,
  output logic [CH_W-1:0]             pp_in_otile,
  output logic [VID_W+CH_W-1:0]       pp_in_tag,
  input  logic                        pp_out_valid,
  input  logic [NPE-1:0][DW-1:0]      pp_out_data,
  input  logic [VID_W+CH_W-1:0]       pp_out_tag,
  output logic                        ext_wr_valid,
  output logic [VID_W-1:0]            ext_wr_out_idx,
  output logic [CH_W-1:0]             ext_wr_otile,
  output logic [NPE-1:0][DW-1:0]      ext_wr_data,
  output logic [NPE-1:0]              ext_wr_mask,
  output logic [31:0]                 n_written
);
  assign ofm_wr_en   = acc_valid && !acc_final;
  assign ofm_wr_addr = OFM_AW'(int'(acc_out_idx) * int'(cfg.cout_tiles) + int'(acc_otile));
  assign ofm_wr_data = acc_psum;
  assign pp_in_valid = acc_valid && acc_final;
  assign pp_in_psum  = acc_psum;
  assign pp_in_otile = acc_otile;
  assign pp_in_tag   = {acc_out_idx, acc_otile};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ext_wr_valid <= 1'b0; ext_wr_out_idx <= '0; ext_wr_otile <= '0;
      ext_wr_data <= '0; ext_wr_mask <= '0; n_written <= '0;
    end else begin
      ext_wr_valid <= pp_out_valid;
      if (pp_out_valid) begin
        {ext_wr_out_idx, ext_wr_otile} <= pp_out_tag;
        ext_wr_data <= pp_out_data;
        for (int n = 0; n < NPE; n++) ext_wr_mask[n] <= |pp_out_data[n];
        n_written <= n_written + 32'd1;
      end
    end
  end
endmodule
