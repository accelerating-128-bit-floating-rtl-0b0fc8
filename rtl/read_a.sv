// read_a: Read A, the reader that brings the A operand from DRAM into the
// memory tile.
//
// For every C block (row block rb of P_R rows, column block cb of
// P_C*M_TILE columns, rb outermost) and every p = 0..k-1 it requests the
// column segment A(rb*P_R .. rb*P_R+P_R-1, p), P_R consecutive words in one
// read beat of P_R*128 bits, and writes the returned beat into the memory
// tile. Rows at or beyond m (the last, partial row block) are replaced by
// zeros. A request is only made when the tile has room for it and for all
// requests still outstanding, so the response path needs no ready.
//
// Interface: start (one-cycle pulse, cfg sampled), a read port with
// req_valid/req_ready/req_addr and in-order resp_valid/resp_data, the tile
// write port and the tile's free count. Throughput: one request per cycle.
//
// From the paper: a Read module for A feeding the memory tile, on a memory bus
// widened for binary128. The address order, the layout of A and the credit
// scheme are this design's own choice.
module read_a
  import fp128_pkg::*;
  import gemm_pkg::*;
#(
  parameter int unsigned P_R    = 8,
  parameter int unsigned P_C    = 16,
  parameter int unsigned M_TILE = 512,
  localparam int unsigned CNT_W = $clog2(M_TILE + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  gemm_cfg_t        cfg,
  output logic             req_valid,
  input  logic             req_ready,
  output logic [31:0]      req_addr,
  input  logic             resp_valid,
  input  fp128_t           resp_data [P_R],
  output logic             tile_wr_valid,
  output fp128_t           tile_wr_data [P_R],
  input  logic [CNT_W-1:0] tile_free
);

  localparam int unsigned BLK_N = P_C * M_TILE;

  gemm_cfg_t   c;
  logic        active;
  logic [31:0] nrb, ncb;
  logic [31:0] rb, cb, kk;          // request side
  logic [31:0] r_rb, r_cb, r_kk;    // response side
  logic [CNT_W:0] outstanding;
  logic        fire;

  assign nrb = (c.m + P_R - 1) / P_R;
  assign ncb = (c.n + BLK_N - 1) / BLK_N;

  assign req_valid = active && ({1'b0, tile_free} > outstanding);
  assign req_addr  = c.a_base + kk * c.lda + rb * P_R;
  assign fire      = req_valid && req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c           <= '0;
      active      <= 1'b0;
      rb          <= '0;
      cb          <= '0;
      kk          <= '0;
      r_rb        <= '0;
      r_cb        <= '0;
      r_kk        <= '0;
      outstanding <= '0;
    end else begin
      if (start) begin
        c      <= cfg;
        active <= (cfg.m != 0) && (cfg.n != 0) && (cfg.k != 0);
        rb     <= '0;
        cb     <= '0;
        kk     <= '0;
        r_rb   <= '0;
        r_cb   <= '0;
        r_kk   <= '0;
      end else if (fire) begin
        if (kk == c.k - 1) begin
          kk <= '0;
          if (cb == ncb - 1) begin
            cb <= '0;
            if (rb == nrb - 1) active <= 1'b0;
            else rb <= rb + 1;
          end else cb <= cb + 1;
        end else kk <= kk + 1;
      end
      if (resp_valid && !start) begin
        if (r_kk == c.k - 1) begin
          r_kk <= '0;
          if (r_cb == ncb - 1) begin
            r_cb <= '0;
            r_rb <= r_rb + 1;
          end else r_cb <= r_cb + 1;
        end else r_kk <= r_kk + 1;
      end
      outstanding <= outstanding + (CNT_W+1)'(fire) - (CNT_W+1)'(resp_valid);
    end
  end

  always_comb begin
    tile_wr_valid = resp_valid;
    for (int i = 0; i < int'(P_R); i++)
      tile_wr_data[i] = (r_rb * P_R + 32'(i) < c.m) ? resp_data[i] : FP128_ZERO;
  end

endmodule
