// map_table: eight FIFOs of IN-OUT map entries. Write side: the Search Filter writes up
// to one entry per FIFO per cycle, already rotated by wr_ptr; FIFO status control then
// advances wr_ptr by the number written. The direct-load port (map entries fetched from
// external memory for Gconv3 and Tconv2) writes one entry at wr_ptr when no search write
// happens that cycle. Read side: the FIFOs are polled in turn (rd_ptr), which returns the
// entries in the order written. almost_full is raised when any FIFO has fewer than two
// free slots; it covers the one query cycle in flight and stops the Query Transmitter
// ("keeps running ... until the Map Table is full"). The 8 FIFOs, the write pointer and
// polled reads follow the paper; the depth (64) and the almost-full rule are choices.
module map_table
  import spocta_pkg::*;
#(
  parameter int DEPTH = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [NBANK-1:0]        wr_en,
  input  map_entry_t [NBANK-1:0]  wr_data,
  output logic [2:0]              wr_ptr,
  input  logic                    ld_valid,
  output logic                    ld_ready,
  input  map_entry_t              ld_data,
  output logic                    rd_valid,
  output map_entry_t              rd_data,
  input  logic                    rd_pop,
  output logic                    almost_full,
  output logic                    all_empty
);
  localparam int CW = $clog2(DEPTH+1);
  logic [NBANK-1:0]          f_push, f_pop, f_empty, f_full;
  map_entry_t [NBANK-1:0]    f_din, f_dout;
  logic [NBANK-1:0][CW-1:0]  f_cnt;
  logic [2:0]                rd_ptr;
  logic                      ld_fire;

  assign ld_ready = !(|wr_en) && !f_full[wr_ptr];
  assign ld_fire  = ld_valid && ld_ready;

  always_comb begin
    f_push = wr_en;
    f_din  = wr_data;
    if (ld_fire) begin
      f_push[wr_ptr] = 1'b1;
      f_din[wr_ptr]  = ld_data;
    end
  end

  for (genvar i = 0; i < NBANK; i++) begin : g_fifo
    sync_fifo #(.T(map_entry_t), .DEPTH(DEPTH)) u_f (
      .clk, .rst_n, .push(f_push[i]), .din(f_din[i]), .pop(f_pop[i]),
      .dout(f_dout[i]), .empty(f_empty[i]), .full(f_full[i]), .count(f_cnt[i])
    );
  end

  assign rd_valid  = !f_empty[rd_ptr];
  assign rd_data   = f_dout[rd_ptr];
  assign all_empty = &f_empty;
  always_comb begin
    f_pop = '0;
    f_pop[rd_ptr] = rd_pop && rd_valid;
  end

  always_comb begin
    almost_full = 1'b0;
    for (int i = 0; i < NBANK; i++)
      if (f_cnt[i] >= CW'(DEPTH-1)) almost_full = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0; rd_ptr <= '0;
    end else begin
      wr_ptr <= wr_ptr + 3'(popcnt16(16'(f_push)));
      if (rd_pop && rd_valid) rd_ptr <= rd_ptr + 3'd1;
    end
  end
endmodule
