// query_transmitter: issues the octree-table queries of one voxel, up to 8 per cycle,
// one per bank (query i goes to the bank whose phi1' = i, so the queries never collide).
// The PNELUT of the paper, indexed by (phi1 of the centre, cnt), is generated by logic:
// for bank b an axis on which b and the centre's phi1 agree can only have neighbour
// offset 0; an axis on which they differ has offsets -1 (cnt bit = 0) and +1 (cnt bit
// = 1). This gives every one of the 27 neighbours exactly once, at most 8 per bank.
// Vacant PNELUT cells and neighbours outside the 16^3 block are masked (q_en = 0).
// Counter: loaded with 8 (Subm3) or 1 (Gconv2) when a voxel is taken, decremented per
// query cycle; the PNELUT column is cnt-1, so the centre itself is queried in the last
// cycle. When cnt reaches zero the next voxel is read from the Voxel List FIFO in the
// same cycle, so back-to-back voxels lose no cycle. Gconv2: one cycle, all 8 banks at the
// voxel's own address (its 2x2x2 parent), weight index = child phi1'. stall (Map Table
// almost full) freezes the transmitter. The counter, FIFO read on zero and 8/1-cycle
// rounds follow the paper; the PNELUT-by-logic, the column order, the weight-index
// encoding and masking at the block border are this design's choices.
module query_transmitter
  import spocta_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  mode_e                        mode,
  input  logic                         fifo_empty,
  input  voxel_t                       fifo_dout,
  output logic                         fifo_pop,
  input  logic                         stall,
  output logic                         q_valid,
  output logic [NBANK-1:0]             q_en,
  output logic [NBANK-1:0][TADDR_W-1:0] q_addr,
  output qmeta_t                       q_meta,
  output logic                         busy
);
  voxel_t     cur;
  logic [3:0] cnt;
  logic [2:0] e;
  logic [3:0] cnt_init;

  assign cnt_init = (mode == M_GCONV2) ? 4'd1 : 4'd8;
  assign e        = 3'(cnt - 4'd1);
  assign q_valid  = busy && !stall;
  // read the FIFO when idle or when the counter is about to reach zero
  assign fifo_pop = !fifo_empty && !stall && (!busy || cnt == 4'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cnt <= '0; cur <= '0;
    end else if (!stall) begin
      if (fifo_pop) begin
        busy <= 1'b1; cur <= fifo_dout; cnt <= cnt_init;
      end else if (busy) begin
        cnt <= cnt - 4'd1;
        if (cnt == 4'd1) busy <= 1'b0;
      end
    end
  end

  always_comb begin
    logic [COORD_W-1:0] c [3];
    int                 nc [3];
    logic [2:0]         cp;
    logic               ok;
    logic signed [2:0]  n [3];
    c[0] = cur.x; c[1] = cur.y; c[2] = cur.z;
    ok = 1'b0;
    for (int a = 0; a < 3; a++) begin n[a] = 3'sd0; nc[a] = 0; end
    cp = oct_phi1(cur.x, cur.y, cur.z);
    q_en   = '0;
    q_addr = '0;
    q_meta = '0;
    q_meta.mode        = mode;
    q_meta.last        = (cnt == 4'd1);
    q_meta.center_phi1 = cp;
    if (mode == M_GCONV2) begin
      q_meta.out_idx = VID_W'(oct_addr(cur.x, cur.y, cur.z));
      for (int b = 0; b < NBANK; b++) begin
        q_en[b]         = busy;
        q_addr[b]       = oct_addr(cur.x, cur.y, cur.z);
        q_meta.w_idx[b] = WIDX_W'(b);
      end
    end else begin
      q_meta.out_idx = cur.idx;
      for (int b = 0; b < NBANK; b++) begin
        ok = busy;
        for (int a = 0; a < 3; a++) begin
          if (b[a] == cp[a]) begin
            n[a] = 3'sd0;
            if (e[a]) ok = 1'b0;                      // vacancy in the PNELUT
          end else begin
            n[a] = e[a] ? 3'sd1 : -3'sd1;
          end
          nc[a] = int'(c[a]) + int'(n[a]);
          if (nc[a] < 0 || nc[a] >= (1 << COORD_W)) ok = 1'b0;   // outside the block
        end
        q_en[b]   = ok;
        q_addr[b] = oct_addr(COORD_W'(nc[0]), COORD_W'(nc[1]), COORD_W'(nc[2]));
        // delta = theta - theta' = -n ; w = (dx+1) + 3(dy+1) + 9(dz+1)
        q_meta.w_idx[b] = WIDX_W'(32'(1 - n[0]) + 3 * 32'(1 - n[1]) + 9 * 32'(1 - n[2]));
      end
    end
  end
endmodule
