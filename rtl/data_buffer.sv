// data_buffer: 16 lane FIFOs between the Gather Unit and the PE array. Each entry is a
// (feature, 16-weight column) pair. The rectifier writes gathered pair j into FIFO
// (wr_ptr + j) mod 16 and advances wr_ptr by the count, so pairs of successive feature
// words, also of different maps, fill the 16 lanes densely. A lane gets at most one pair
// per cycle; in_ready is high while no FIFO is full. The PE side sees the 16 heads and
// pops the lanes it consumes. The rectifier and 16 FIFOs follow the paper; the depth (4)
// and the joint feature/weight FIFO per lane are this design's choices.
module data_buffer
  import spocta_pkg::*;
#(
  parameter int DEPTH = 4
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               in_valid,
  output logic                               in_ready,
  input  logic [4:0]                         in_cnt,
  input  logic [LANES-1:0][DW-1:0]           in_x,
  input  logic [LANES-1:0][NPE-1:0][DW-1:0]  in_w,
  output logic [LANES-1:0]                   lane_valid,
  output logic [LANES-1:0][DW-1:0]           hx,
  output logic [LANES-1:0][NPE-1:0][DW-1:0]  hw,
  input  logic [LANES-1:0]                   pop,
  output logic                               empty
);
  typedef struct packed {
    logic [DW-1:0]          x;
    logic [NPE-1:0][DW-1:0] w;
  } pair_t;

  logic [3:0]              wr_ptr;
  logic [LANES-1:0]        f_push, f_empty, f_full;
  pair_t [LANES-1:0]       f_din, f_dout;
  logic                    fire;

  assign in_ready = !(|f_full);
  assign fire     = in_valid && in_ready;
  assign empty    = &f_empty;

  always_comb begin
    logic [3:0] slot;
    f_push = '0;
    f_din  = '0;
    for (int j = 0; j < LANES; j++) begin
      slot = wr_ptr + 4'(j);
      if (fire && 5'(j) < in_cnt) begin
        f_push[slot]  = 1'b1;
        f_din[slot].x = in_x[j];
        f_din[slot].w = in_w[j];
      end
    end
  end

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    logic [$clog2(DEPTH+1)-1:0] cnt;
    sync_fifo #(.T(pair_t), .DEPTH(DEPTH)) u_f (
      .clk, .rst_n, .push(f_push[i]), .din(f_din[i]), .pop(pop[i] && !f_empty[i]),
      .dout(f_dout[i]), .empty(f_empty[i]), .full(f_full[i]), .count(cnt)
    );
    assign lane_valid[i] = !f_empty[i];
    assign hx[i] = f_dout[i].x;
    assign hw[i] = f_dout[i].w;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    wr_ptr <= '0;
    else if (fire) wr_ptr <= wr_ptr + in_cnt[3:0];
  end
endmodule
