// gemm_top: binary128 matrix-multiply accelerator, C' = A B, built as a
// P_R x P_C systolic array of binary128 multiply-add processing elements.
//
// Data path (one C block of P_R rows x P_C*M_TILE columns at a time):
//   Read A -> memory tile -> Feed A_0 -> Feed A_1 -> ... (one per PE row)
//   Read B -> B queue     -> Feed B_0 -> Feed B_1 -> ... (one per PE column)
//   A values move right along the PE rows, B values move down the columns;
//   PE (i, j) accumulates C(row i, columns j, j+P_C, ..., j+(M_TILE-1)*P_C)
//   of the block over p = 0..k-1.
//   Results move up each column to Drain C_j, along the Drain chain to
//   Drain C_0 and into Store C, which writes them to memory.
//
// Control: the array advances one step per cycle unless a PE result buffer is
// nearly full (stall). A step injects a new term into the chains only when the
// memory tile holds the current A column and the B queue holds a B row
// segment; otherwise an empty (bubble) step goes through. Each A column is
// used M_TILE times (t = 0..M_TILE-1), once with each B segment of the same p.
//
// Interface: start (one-cycle pulse) with cfg (sizes, leading dimensions and
// base addresses in 128-bit words), busy and done. Three memory ports: an A
// read port (P_R words per beat), a B read port (P_C words per beat), both
// with in-order responses a fixed number of cycles after a request, and a C
// write port. Sustained rate: P_R*P_C multiply-adds per cycle once the
// array is full, when memory delivers one B beat per cycle.
//
// From the paper: the PE grid and its default size 8 x 16, M_Tile = 512, the
// module chain Read/Feed/PE/Drain/Store, binary128 multiply-add PEs and the
// A buffer in front of Feed. alpha, beta and transposes are left to the host,
// as in the paper. Block shape, tags, drain order, stall rule and the memory
// port protocol are this design's own choices.
//
// Lint notes: the result ready signals up_r form a chain through the PE
// columns (each PE's up_in_ready depends on its up_out_ready), which a
// simulator that treats the whole up_r array as one signal reports as a
// combinational loop; there is no loop between individual wires. rst_n is
// an asynchronous reset in every register; its only other use is in the
// "disable iff" of the PE assertions, which a linter may report as a
// synchronous use.
module gemm_top
  import fp128_pkg::*;
  import gemm_pkg::*;
#(
  parameter int unsigned P_R      = 8,
  parameter int unsigned P_C      = 16,
  parameter int unsigned M_TILE   = 512,
  parameter int unsigned MUL_LAT  = 4,
  parameter int unsigned ADD_LAT  = 4,
  parameter int unsigned BQ_DEPTH = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  gemm_cfg_t   cfg,
  output logic        busy,
  output logic        done,
  // A read port
  output logic        a_req_valid,
  input  logic        a_req_ready,
  output logic [31:0] a_req_addr,
  input  logic        a_resp_valid,
  input  fp128_t      a_resp_data [P_R],
  // B read port
  output logic        b_req_valid,
  input  logic        b_req_ready,
  output logic [31:0] b_req_addr,
  input  logic        b_resp_valid,
  input  fp128_t      b_resp_data [P_C],
  // C write port
  output logic        c_wr_valid,
  input  logic        c_wr_ready,
  output logic [31:0] c_wr_addr,
  output fp128_t      c_wr_data
);

  localparam int unsigned TCNT_W = $clog2(M_TILE + 1);
  localparam int unsigned QCNT_W = $clog2(BQ_DEPTH + 1);
  localparam int unsigned T_BITS = (M_TILE > 1) ? $clog2(M_TILE) : 1;

  // ---- Read A and memory tile ---------------------------------------------
  logic              tile_wr_valid;
  fp128_t            tile_wr_data [P_R];
  logic [TCNT_W-1:0] tile_free;
  logic              tile_valid, tile_last_use, take;
  fp128_t            tile_col [P_R];
  logic [T_BITS-1:0] tile_t;

  read_a #(.P_R(P_R), .P_C(P_C), .M_TILE(M_TILE)) u_read_a (
    .clk, .rst_n, .start, .cfg,
    .req_valid(a_req_valid), .req_ready(a_req_ready), .req_addr(a_req_addr),
    .resp_valid(a_resp_valid), .resp_data(a_resp_data),
    .tile_wr_valid, .tile_wr_data, .tile_free
  );

  memory_tile #(.P_R(P_R), .M_TILE(M_TILE)) u_tile (
    .clk, .rst_n,
    .wr_valid(tile_wr_valid), .wr_data(tile_wr_data), .free(tile_free),
    .out_valid(tile_valid), .out_col(tile_col), .out_t(tile_t),
    .out_last_use(tile_last_use), .take
  );

  // ---- Read B and B queue ----------------------------------------------------
  logic              q_wr_valid, q_empty, q_full;
  fp128_t            q_wr_data [P_C];
  fp128_t            q_row [P_C];
  logic [QCNT_W-1:0] q_free, q_count;
  logic [P_C*128-1:0] q_wr_word, q_rd_word;

  read_b #(.P_R(P_R), .P_C(P_C), .M_TILE(M_TILE), .Q_DEPTH(BQ_DEPTH)) u_read_b (
    .clk, .rst_n, .start, .cfg,
    .req_valid(b_req_valid), .req_ready(b_req_ready), .req_addr(b_req_addr),
    .resp_valid(b_resp_valid), .resp_data(b_resp_data),
    .q_wr_valid, .q_wr_data, .q_free
  );

  always_comb begin
    for (int j = 0; j < int'(P_C); j++) begin
      q_wr_word[j*128 +: 128] = q_wr_data[j];
      q_row[j]                = q_rd_word[j*128 +: 128];
    end
  end

  sync_fifo #(.WIDTH(P_C * 128), .DEPTH(BQ_DEPTH)) u_bq (
    .clk, .rst_n,
    .wr_en(q_wr_valid), .wr_data(q_wr_word),
    .rd_en(take), .rd_data(q_rd_word),
    .empty(q_empty), .full(q_full), .count(q_count), .free(q_free)
  );

  // ---- array controller ------------------------------------------------------
  logic        step, hold;
  logic [31:0] kk;        // current p of the current block
  logic [31:0] k_cfg;
  logic        pe_af [P_R][P_C];

  always_comb begin
    hold = 1'b0;
    for (int i = 0; i < int'(P_R); i++)
      for (int j = 0; j < int'(P_C); j++)
        hold |= pe_af[i][j];
  end

  assign step = !hold;
  assign take = step && tile_valid && !q_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kk    <= '0;
      k_cfg <= '0;
    end else if (start) begin
      kk    <= '0;
      k_cfg <= cfg.k;
    end else if (take && tile_last_use) begin
      kk <= (kk == k_cfg - 1) ? '0 : kk + 1;
    end
  end

  // ---- Feed chains -----------------------------------------------------------
  logic           fa_valid [P_R+1];
  logic           fa_first [P_R+1];
  logic           fa_last  [P_R+1];
  logic [T_W-1:0] fa_t     [P_R+1];
  fp128_t         fa_col   [P_R+1][P_R];
  a_elem_t        fa_pe    [P_R];

  logic           fb_valid [P_C+1];
  fp128_t         fb_row   [P_C+1][P_C];
  b_elem_t        fb_pe    [P_C];

  assign fa_valid[0] = take;
  assign fa_first[0] = (kk == 0);
  assign fa_last[0]  = (kk == k_cfg - 1);
  assign fa_t[0]     = T_W'(tile_t);
  assign fa_col[0]   = tile_col;
  assign fb_valid[0] = take;
  assign fb_row[0]   = q_row;

  for (genvar i = 0; i < int'(P_R); i++) begin : g_feed_a
    feed_a #(.P_R(P_R), .IDX(i)) u_feed_a (
      .clk, .rst_n, .step,
      .in_valid(fa_valid[i]), .in_first(fa_first[i]), .in_last(fa_last[i]),
      .in_t(fa_t[i]), .in_col(fa_col[i]),
      .out_valid(fa_valid[i+1]), .out_first(fa_first[i+1]), .out_last(fa_last[i+1]),
      .out_t(fa_t[i+1]), .out_col(fa_col[i+1]),
      .pe_out(fa_pe[i])
    );
  end

  for (genvar j = 0; j < int'(P_C); j++) begin : g_feed_b
    feed_b #(.P_C(P_C), .IDX(j)) u_feed_b (
      .clk, .rst_n, .step,
      .in_valid(fb_valid[j]), .in_row(fb_row[j]),
      .out_valid(fb_valid[j+1]), .out_row(fb_row[j+1]),
      .pe_out(fb_pe[j])
    );
  end

  // ---- PE array --------------------------------------------------------------
  a_elem_t pe_a   [P_R][P_C];
  b_elem_t pe_b   [P_R][P_C];
  logic    up_v   [P_R+1][P_C];
  logic    up_r   [P_R+1][P_C];
  fp128_t  up_d   [P_R+1][P_C];

  for (genvar i = 0; i < int'(P_R); i++) begin : g_row
    for (genvar j = 0; j < int'(P_C); j++) begin : g_col
      a_elem_t a_src;
      b_elem_t b_src;
      if (j == 0) begin : g_a_edge
        assign a_src = fa_pe[i];
      end else begin : g_a_in
        assign a_src = pe_a[i][j-1];
      end
      if (i == 0) begin : g_b_edge
        assign b_src = fb_pe[j];
      end else begin : g_b_in
        assign b_src = pe_b[i-1][j];
      end
      pe #(.M_TILE(M_TILE), .P_R(P_R), .ROW(i), .MUL_LAT(MUL_LAT), .ADD_LAT(ADD_LAT)) u_pe (
        .clk, .rst_n, .step,
        .a_in(a_src), .a_out(pe_a[i][j]),
        .b_in(b_src), .b_out(pe_b[i][j]),
        .up_in_valid(up_v[i+1][j]), .up_in_ready(up_r[i+1][j]), .up_in_data(up_d[i+1][j]),
        .up_out_valid(up_v[i][j]), .up_out_ready(up_r[i][j]), .up_out_data(up_d[i][j]),
        .almost_full(pe_af[i][j])
      );
    end
  end

  // Nothing comes from below the bottom row.
  for (genvar j = 0; j < int'(P_C); j++) begin : g_bottom
    assign up_v[P_R][j] = 1'b0;
    assign up_d[P_R][j] = '0;
  end

  // ---- Drain chain -------------------------------------------------------------
  logic   dr_v [P_C+1];
  logic   dr_r [P_C+1];
  fp128_t dr_d [P_C+1];

  assign dr_v[P_C] = 1'b0;
  assign dr_d[P_C] = '0;

  for (genvar j = 0; j < int'(P_C); j++) begin : g_drain
    drain_c #(.P_R(P_R), .P_C(P_C), .M_TILE(M_TILE), .IDX(j)) u_drain (
      .clk, .rst_n,
      .col_valid(up_v[0][j]), .col_ready(up_r[0][j]), .col_data(up_d[0][j]),
      .chain_in_valid(dr_v[j+1]), .chain_in_ready(dr_r[j+1]), .chain_in_data(dr_d[j+1]),
      .out_valid(dr_v[j]), .out_ready(dr_r[j]), .out_data(dr_d[j])
    );
  end

  // ---- Store C -----------------------------------------------------------------
  logic store_skip;

  store_c #(.P_R(P_R), .P_C(P_C), .M_TILE(M_TILE)) u_store (
    .clk, .rst_n, .start, .cfg,
    .in_valid(dr_v[0]), .in_ready(dr_r[0]), .in_data(dr_d[0]),
    .wr_valid(c_wr_valid), .wr_ready(c_wr_ready), .wr_addr(c_wr_addr), .wr_data(c_wr_data),
    .done, .skip(store_skip)
  );

  logic started;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) started <= 1'b0;
    else if (start) started <= 1'b1;
  end
  assign busy = started && !done;

  initial assert (M_TILE >= P_R + P_C + MUL_LAT + ADD_LAT + 2)
    else $error("gemm_top: M_TILE too small for deadlock-free draining");

endmodule
