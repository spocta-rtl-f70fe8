// tb_weight_fetcher: sweeps all 27 Subm3 offsets, output tiles and chunks for several
// layer configurations and compares status (A,R), source and address with a reference
// written from the rules of the non-uniform caching scheme; also the linear layout of
// the other layer types.
module tb_weight_fetcher;
  import spocta_pkg::*;
  int checks = 0, failures = 0;
  layer_cfg_t cfg;
  logic [WIDX_W-1:0] w_idx;
  logic [CH_W-1:0] otile, chunk;
  logic stat_a, stat_r, src_ext;
  logic [WM_AW-1:0] addr;
  weight_fetcher dut (.*);
  initial begin
    for (int c = 0; c < 4; c++) begin
      cfg = '0; cfg.mode = M_SUBM3;
      cfg.cin_chunks = 5'(c + 1); cfg.cout_tiles = 5'(2 + c % 2);
      cfg.mid_otiles = (c < 2) ? cfg.cout_tiles : 5'd1;
      cfg.ud_otiles  = (c == 0) ? cfg.cout_tiles : 5'd1;
      cfg.n_up = 4'd2; cfg.up_list[0] = 5'd22; cfg.up_list[1] = 5'd19;
      cfg.n_down = 4'd1; cfg.down_list[0] = 5'd4;
      for (int w = 0; w < 27; w++) for (int o = 0; o < int'(cfg.cout_tiles); o++)
        for (int k = 0; k < int'(cfg.cin_chunks); k++) begin
          bit ea, er, ee; int ead, cc, pos;
          cc = cfg.cin_chunks; ee = 0; ea = 0; er = 1; ead = 0;
          w_idx = 5'(w); otile = 4'(o); chunk = 4'(k);
          #1;
          if (w == 13) ead = o * cc + k;
          else if (w / 9 == 1) begin
            ea = cfg.mid_otiles != cfg.cout_tiles; ee = o >= cfg.mid_otiles;
            ead = 256 + (((w < 13) ? w - 9 : w - 10) * cfg.mid_otiles + o) * cc + k;
          end else begin
            pos = -1;
            if (w == 22) pos = 0; else if (w == 19) pos = 1; else if (w == 4) pos = 0;
            if (pos < 0) begin ea = 1; er = 0; ee = 1; end
            else begin
              ea = cfg.ud_otiles != cfg.cout_tiles; ee = o >= cfg.ud_otiles;
              ead = ((w >= 18) ? 384 : 416) + (pos * cfg.ud_otiles + o) * cc + k;
            end
          end
          if (ee) ead = 0;
          checks++;
          if (stat_a != ea || stat_r != er || src_ext != ee || addr != 9'(ead)) begin
            failures++; $display("FAIL cfg %0d w %0d o %0d k %0d: A%0d R%0d E%0d @%0d", c, w, o, k, stat_a, stat_r, src_ext, addr);
          end
        end
    end
    cfg.mode = M_GCONV3; cfg.cin_chunks = 5'd4; cfg.cout_tiles = 5'd4;
    for (int w = 0; w < 27; w++) begin
      int f; w_idx = 5'(w); otile = 4'd3; chunk = 4'd2; #1;
      f = (w * 4 + 3) * 4 + 2;
      checks++;
      if (src_ext != (f >= WM_WORDS) || (f < WM_WORDS && addr != 9'(f))) begin failures++; $display("FAIL linear w %0d", w); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
