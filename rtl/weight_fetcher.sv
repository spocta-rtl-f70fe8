// weight_fetcher: the cache-like decision logic of the non-uniform weight memory. From
// the kernel offset of a map (w_idx = (dx+1)+3(dy+1)+9(dz+1)), the output-channel tile,
// the input chunk and the layer configuration it returns the status pair of the paper's
// figure, A (access external memory) and R (read weight memory), the word address, and
// src_ext, whether this particular tile comes from external memory. Subm3 rules:
//   centre offset          -> A=0 R=1, always on chip;
//   other offsets with dz=0 -> A=0 R=1 if W_mid is held for all of Cout, else A=1 R=1;
//   dz=+1/-1 in the reserved W_up/W_down list -> same test with C'out of W_up/W_down;
//   dz=+1/-1 not in the list -> A=1 R=0.
// With A=1 R=1 only the first C'out/16 output tiles are on chip. Other layer types lay
// all kernel offsets out linearly over the whole memory; tiles past its end come from
// external memory. Purely combinational. The status rules are the paper's; the meaning
// given to (A,R), the layouts and the non-Subm3 rule are this design's choices.
module weight_fetcher
  import spocta_pkg::*;
(
  input  layer_cfg_t          cfg,
  input  logic [WIDX_W-1:0]   w_idx,
  input  logic [CH_W-1:0]     otile,
  input  logic [CH_W-1:0]     chunk,
  output logic                stat_a,
  output logic                stat_r,
  output logic                src_ext,
  output logic [WM_AW-1:0]    addr
);
  always_comb begin
    int cc, wi, slot, pos, a;
    logic found, dz_up;
    cc = int'(cfg.cin_chunks);
    wi = int'(w_idx);
    stat_a = 1'b0; stat_r = 1'b1; src_ext = 1'b0; a = 0;
    found = 1'b0; pos = 0; slot = 0;
    dz_up = (wi >= 18);
    if (cfg.mode == M_SUBM3) begin
      if (wi == W_CENTER) begin
        a = int'(otile) * cc + int'(chunk);
      end else if (wi >= 9 && wi < 18) begin
        slot = (wi < W_CENTER) ? wi - 9 : wi - 10;
        stat_a  = (cfg.mid_otiles != cfg.cout_tiles);
        src_ext = (5'(otile) >= cfg.mid_otiles);
        a = WM_MID_BASE + (slot * int'(cfg.mid_otiles) + int'(otile)) * cc + int'(chunk);
      end else begin
        for (int i = 0; i < 9; i++) begin
          if (!found && dz_up && 4'(i) < cfg.n_up && cfg.up_list[i] == w_idx) begin
            found = 1'b1; pos = i;
          end
          if (!found && !dz_up && 4'(i) < cfg.n_down && cfg.down_list[i] == w_idx) begin
            found = 1'b1; pos = i;
          end
        end
        if (found) begin
          stat_a  = (cfg.ud_otiles != cfg.cout_tiles);
          src_ext = (5'(otile) >= cfg.ud_otiles);
          a = (dz_up ? WM_UP_BASE : WM_DOWN_BASE)
              + (pos * int'(cfg.ud_otiles) + int'(otile)) * cc + int'(chunk);
        end else begin
          stat_a = 1'b1; stat_r = 1'b0; src_ext = 1'b1;
        end
      end
    end else begin
      a = (wi * int'(cfg.cout_tiles) + int'(otile)) * cc + int'(chunk);
      if (a >= WM_WORDS) begin
        stat_a = 1'b1; stat_r = 1'b0; src_ext = 1'b1;
      end
    end
    if (src_ext || a >= WM_WORDS) a = 0;
    addr = WM_AW'(a);
  end
endmodule
