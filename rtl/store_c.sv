// store_c: Store C, the writer of the result matrix.
//
// It receives the results from Drain C_0 in the fixed drain order: per C
// block (rb outermost, then cb), per PE column j, per PE row i, per
// accumulator t. From that position alone it works out the element,
// row = rb*P_R + i and col = cb*P_C*M_TILE + t*P_C + j, and writes it to
// c_base + col*ldc + row. Results of the padding rows and columns beyond m and
// n are dropped without a write. done rises when the last result of the last
// block has been handled and stays high until the next start.
//
// Interface: start/cfg, result stream in_valid/in_ready/in_data, write port
// wr_valid/wr_ready/wr_addr/wr_data, done. One result per cycle.
//
// From the paper: a Store module that collects C from the Drain modules and
// writes it to main memory. Layout, order and padding are this design's own.
module store_c
  import fp128_pkg::*;
  import gemm_pkg::*;
#(
  parameter int unsigned P_R    = 8,
  parameter int unsigned P_C    = 16,
  parameter int unsigned M_TILE = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  gemm_cfg_t   cfg,
  input  logic        in_valid,
  output logic        in_ready,
  input  fp128_t      in_data,
  output logic        wr_valid,
  input  logic        wr_ready,
  output logic [31:0] wr_addr,
  output fp128_t      wr_data,
  output logic        done,
  output logic        skip     // a padding result was dropped this cycle
);

  localparam int unsigned BLK_N = P_C * M_TILE;

  gemm_cfg_t   c;
  logic        active;
  logic [31:0] nrb, ncb;
  logic [31:0] rb, cb, j, i, t, row, col;
  logic        in_range, fire;

  assign nrb    = (c.m + P_R - 1) / P_R;
  assign ncb    = (c.n + BLK_N - 1) / BLK_N;
  assign row    = rb * P_R + i;
  assign col    = cb * BLK_N + t * P_C + j;
  assign in_range = (row < c.m) && (col < c.n);

  assign wr_valid = active && in_valid && in_range;
  assign wr_addr  = c.c_base + col * c.ldc + row;
  assign wr_data  = in_data;
  assign in_ready = active && (in_range ? wr_ready : 1'b1);
  assign fire     = in_valid && in_ready;
  assign skip     = fire && !in_range;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c      <= '0;
      active <= 1'b0;
      done   <= 1'b0;
      rb     <= '0;
      cb     <= '0;
      j      <= '0;
      i      <= '0;
      t      <= '0;
    end else if (start) begin
      c      <= cfg;
      active <= (cfg.m != 0) && (cfg.n != 0) && (cfg.k != 0);
      done   <= (cfg.m == 0) || (cfg.n == 0) || (cfg.k == 0);
      rb     <= '0;
      cb     <= '0;
      j      <= '0;
      i      <= '0;
      t      <= '0;
    end else if (fire) begin
      if (t == M_TILE - 1) begin
        t <= '0;
        if (i == P_R - 1) begin
          i <= '0;
          if (j == P_C - 1) begin
            j <= '0;
            if (cb == ncb - 1) begin
              cb <= '0;
              if (rb == nrb - 1) begin
                active <= 1'b0;
                done   <= 1'b1;
              end else rb <= rb + 1;
            end else cb <= cb + 1;
          end else j <= j + 1;
        end else i <= i + 1;
      end else t <= t + 1;
    end
  end

  a_wr_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              wr_valid && !wr_ready |=> wr_valid && $stable(wr_addr));

endmodule
