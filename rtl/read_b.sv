// read_b: Read B, the reader that streams the B operand from DRAM.
//
// For every C block (row block rb, column block cb, rb outermost), every
// p = 0..k-1 and every t = 0..M_TILE-1 it requests the row segment
// B(p, cb*P_C*M_TILE + t*P_C .. + P_C-1): P_C consecutive words in one read
// beat of P_C*128 bits, one word for each PE column. Columns at or beyond n
// are replaced by zeros. Beats go into the B queue in front of Feed B; a
// request is made only when the queue has room for it and for all
// outstanding requests. At one beat per cycle this port carries the P_C words
// per cycle that, with the small A share, make up the array's bandwidth need.
//
// Interface: start (cfg sampled), read port req_valid/req_ready/req_addr,
// in-order resp_valid/resp_data, queue write port and queue free count.
//
// From the paper: a Read module for B, on a memory bus widened for binary128.
// Address order, operand layout and credits are this design's own choice.
module read_b
  import fp128_pkg::*;
  import gemm_pkg::*;
#(
  parameter int unsigned P_R      = 8,
  parameter int unsigned P_C      = 16,
  parameter int unsigned M_TILE   = 512,
  parameter int unsigned Q_DEPTH  = 64,
  localparam int unsigned QCNT_W  = $clog2(Q_DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  gemm_cfg_t         cfg,
  output logic              req_valid,
  input  logic              req_ready,
  output logic [31:0]       req_addr,
  input  logic              resp_valid,
  input  fp128_t            resp_data [P_C],
  output logic              q_wr_valid,
  output fp128_t            q_wr_data [P_C],
  input  logic [QCNT_W-1:0] q_free
);

  localparam int unsigned BLK_N = P_C * M_TILE;

  gemm_cfg_t   c;
  logic        active;
  logic [31:0] nrb, ncb;
  logic [31:0] rb, cb, kk, t;          // request side
  logic [31:0] r_cb, r_kk, r_t;        // response side
  logic [QCNT_W:0] outstanding;
  logic        fire;

  assign nrb = (c.m + P_R - 1) / P_R;
  assign ncb = (c.n + BLK_N - 1) / BLK_N;

  assign req_valid = active && ({1'b0, q_free} > outstanding);
  assign req_addr  = c.b_base + kk * c.ldb + cb * BLK_N + t * P_C;
  assign fire      = req_valid && req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c           <= '0;
      active      <= 1'b0;
      rb          <= '0;
      cb          <= '0;
      kk          <= '0;
      t           <= '0;
      r_cb        <= '0;
      r_kk        <= '0;
      r_t         <= '0;
      outstanding <= '0;
    end else begin
      if (start) begin
        c      <= cfg;
        active <= (cfg.m != 0) && (cfg.n != 0) && (cfg.k != 0);
        rb     <= '0;
        cb     <= '0;
        kk     <= '0;
        t      <= '0;
        r_cb   <= '0;
        r_kk   <= '0;
        r_t    <= '0;
      end else if (fire) begin
        if (t == M_TILE - 1) begin
          t <= '0;
          if (kk == c.k - 1) begin
            kk <= '0;
            if (cb == ncb - 1) begin
              cb <= '0;
              if (rb == nrb - 1) active <= 1'b0;
              else rb <= rb + 1;
            end else cb <= cb + 1;
          end else kk <= kk + 1;
        end else t <= t + 1;
      end
      if (resp_valid && !start) begin
        if (r_t == M_TILE - 1) begin
          r_t <= '0;
          if (r_kk == c.k - 1) begin
            r_kk <= '0;
            r_cb <= (r_cb == ncb - 1) ? '0 : r_cb + 1;
          end else r_kk <= r_kk + 1;
        end else r_t <= r_t + 1;
      end
      outstanding <= outstanding + (QCNT_W+1)'(fire) - (QCNT_W+1)'(resp_valid);
    end
  end

  always_comb begin
    q_wr_valid = resp_valid;
    for (int j = 0; j < int'(P_C); j++)
      q_wr_data[j] = (r_cb * BLK_N + r_t * P_C + 32'(j) < c.n) ? resp_data[j] : FP128_ZERO;
  end

endmodule
