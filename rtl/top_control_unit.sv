// top_control_unit: connects the search core and the computing core. It polls IN-OUT
// maps out of the Map Table and collects one output window in a 27-entry buffer (until
// the map flagged 'last'; in input-stationary modes every map is its own group). It then
// replays the window for every 16-channel output tile and, inside, for every map and
// every 16-channel input chunk it issues a compute job to the SPAC core, marking the
// first and last job of the accumulation group. In Gconv2 mode each map is also exported
// (map_exp_*) with input and output swapped, ready to be loaded back for the matching
// Tconv2 layer. When layer_end is high, no maps are left and both cores are idle, the
// layer finishes: input-stationary layers first drain the Ofmap Mem; then done is held
// high until layer_end falls. Window collection, per-tile replay and export are this
// design's reading of the paper's "gathering the needed ifmaps and weights according to
// the IN-OUT maps and administrating the flow".
module top_control_unit
  import spocta_pkg::*;
#(
  parameter int WIN_MAX = 27
) (
  input  logic        clk,
  input  logic        rst_n,
  input  layer_cfg_t  cfg,
  input  logic        map_valid,
  input  map_entry_t  map_data,
  output logic        map_pop,
  input  logic        maps_empty,
  input  logic        search_idle,
  output logic        job_valid,
  input  logic        job_ready,
  output job_t        job,
  output logic        drain_req,
  input  logic        drain_done,
  input  logic        spac_idle,
  input  logic        layer_end,
  output logic        done,
  output logic        map_exp_valid,
  output map_entry_t  map_exp_data,
  output logic [31:0] n_windows
);
  typedef enum logic [2:0] {T_COLLECT, T_JOBS, T_WAIT, T_DRAIN, T_DONE} st_e;
  st_e st;
  map_entry_t win [WIN_MAX];
  logic [4:0] n, e;
  logic [CH_W-1:0] ch, ot;
  logic [1:0] wcnt;
  logic is_mode, close;

  assign is_mode = (cfg.mode == M_GCONV3) || (cfg.mode == M_TCONV2);
  assign map_pop = (st == T_COLLECT) && map_valid && (n < 5'(WIN_MAX));
  assign close   = map_data.last || is_mode || (n == 5'(WIN_MAX - 1));

  assign map_exp_valid = map_pop && (cfg.mode == M_GCONV2);
  always_comb begin
    map_exp_data         = map_data;
    map_exp_data.in_idx  = map_data.out_idx;
    map_exp_data.out_idx = map_data.in_idx;
    map_exp_data.last    = 1'b1;
  end

  assign job_valid = (st == T_JOBS);
  always_comb begin
    job         = '0;
    job.in_idx  = win[e].in_idx;
    job.w_idx   = win[e].w_idx;
    job.out_idx = win[e].out_idx;
    job.chunk   = ch;
    job.otile   = ot;
    job.first   = (e == 0) && (ch == 0);
    job.last    = (e == n - 5'd1) && (ch == CH_W'(cfg.cin_chunks - 1));
  end

  assign drain_req = (st == T_DRAIN);
  assign done      = (st == T_DONE);

  always_ff @(posedge clk) if (map_pop) win[n] <= map_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_COLLECT; n <= '0; e <= '0; ch <= '0; ot <= '0; wcnt <= '0; n_windows <= '0;
    end else begin
      unique case (st)
        T_COLLECT: begin
          if (map_pop) begin
            n <= n + 5'd1;
            if (close) begin
              st <= T_JOBS; e <= '0; ch <= '0; ot <= '0;
              n_windows <= n_windows + 32'd1;
            end
          end else if (layer_end && maps_empty && search_idle && n == 0 && spac_idle) begin
            st <= T_WAIT; wcnt <= '0;
          end
        end
        T_JOBS: if (job_ready) begin
          if (ch != CH_W'(cfg.cin_chunks - 1)) ch <= ch + 1'b1;
          else begin
            ch <= '0;
            if (e != n - 5'd1) e <= e + 5'd1;
            else begin
              e <= '0;
              if (ot != CH_W'(cfg.cout_tiles - 1)) ot <= ot + 1'b1;
              else begin st <= T_COLLECT; n <= '0; end
            end
          end
        end
        T_WAIT: begin          // let the last result leave postprocessing
          wcnt <= wcnt + 2'd1;
          if (!spac_idle) wcnt <= '0;
          if (wcnt == 2'd3) st <= is_mode ? T_DRAIN : T_DONE;
        end
        T_DRAIN: if (drain_done) st <= T_DONE;
        T_DONE:  if (!layer_end) st <= T_COLLECT;
        default: st <= T_COLLECT;
      endcase
    end
  end
endmodule
