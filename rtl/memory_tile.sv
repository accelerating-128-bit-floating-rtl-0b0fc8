// memory_tile: on-chip buffer of a P_R x M_TILE sub-matrix of A in front of
// the Feed A chain.
//
// Read A writes one column of the current A row block (P_R binary128 values,
// one per PE row) per write. The tile holds up to M_TILE such columns, so Read
// A can run up to M_TILE columns ahead of the array. Each column is then
// reused M_TILE times: the head column is offered with the index t = 0, 1,
// ..., M_TILE-1 (one use per accepted `take`) and is released after the last
// use, freeing its slot. The t index tells the PEs which of their M_TILE
// accumulators (output columns) the term belongs to. With this reuse the
// array needs only P_R/M_TILE A words per cycle from memory.
//
// Interface: wr_valid/wr_data (no ready: the writer keeps count of `free`),
// out_valid/out_col/out_t/out_last_use and take.
//
// From the paper: a buffer of A in front of Feed, a 1-D array whose size is set
// by M_Tile, that stores a sub-matrix of A and reuses it many times. The
// column-by-column organisation and the reuse count equal to M_TILE are this
// design's own choice.
module memory_tile
  import fp128_pkg::*;
#(
  parameter int unsigned P_R    = 8,
  parameter int unsigned M_TILE = 512,
  localparam int unsigned CNT_W = $clog2(M_TILE + 1),
  localparam int unsigned T_BITS = (M_TILE > 1) ? $clog2(M_TILE) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_valid,
  input  fp128_t            wr_data [P_R],
  output logic [CNT_W-1:0]  free,
  output logic              out_valid,
  output fp128_t            out_col [P_R],
  output logic [T_BITS-1:0] out_t,
  output logic              out_last_use,
  input  logic              take
);

  // The tile is one 1-D array of P_R*128-bit words, one word per column of A.
  logic [P_R*128-1:0] wr_word, rd_word;
  logic               empty, full, pop;
  logic [CNT_W-1:0]   count;
  logic [T_BITS-1:0]  use_cnt;

  always_comb begin
    for (int i = 0; i < int'(P_R); i++) begin
      wr_word[i*128 +: 128] = wr_data[i];
      out_col[i]            = rd_word[i*128 +: 128];
    end
  end

  sync_fifo #(.WIDTH(P_R * 128), .DEPTH(M_TILE)) u_store (
    .clk, .rst_n,
    .wr_en(wr_valid), .wr_data(wr_word),
    .rd_en(pop), .rd_data(rd_word),
    .empty, .full, .count, .free
  );

  assign out_valid    = !empty;
  assign out_t        = use_cnt;
  assign out_last_use = (use_cnt == T_BITS'(M_TILE - 1));
  assign pop          = take && out_last_use;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) use_cnt <= '0;
    else if (take) use_cnt <= out_last_use ? '0 : use_cnt + 1'b1;
  end

  a_take_valid: assert property (@(posedge clk) disable iff (!rst_n) take |-> out_valid);

endmodule
