// pe: processing element of the binary128 GEMM systolic array.
//
// Each PE owns M_TILE elements of the output matrix C: one row i of the current
// C block and the M_TILE columns t = 0..M_TILE-1 that map to this PE column.
// Its accumulators live in a local M_TILE-deep memory. On every array step
// (step = 1) the PE consumes the A term held in a_reg and the B term held in
// b_reg, issues one multiply-add acc[t] = acc[t] + a*b into its binary128
// multiply and add pipelines, and passes a_reg to the right neighbour and
// b_reg to the neighbour below, as in a classic systolic array. A term tagged
// first starts the sum (the accumulator is replaced by -0, the additive
// identity); a term tagged last completes it, and the finished sum is also
// written into a result buffer of 2*M_TILE words.
//
// Results leave upward through the drain port: per block, the PE sends its own
// M_TILE results, then relays the (P_R-1-ROW)*M_TILE results of the PEs below.
// almost_full asks the array controller to stop stepping while the result
// buffer might overflow (backpressure from the drain path).
//
// Timing: a term issued in cycle c is multiplied by cycle c+MUL_LAT, reads its
// accumulator then, and is written back MUL_LAT+ADD_LAT cycles after issue.
// The same accumulator is read again at least M_TILE cycles later, so
// M_TILE > ADD_LAT is required (checked by an assertion).
//
// From the paper: the PE grid, the data directions (A to the right, B down,
// C up), one multiply-add per PE per cycle, a local buffer per PE whose size
// grows with M_Tile. The accumulator organisation, the tags and the drain
// order are this design's own choice.
module pe
  import fp128_pkg::*;
  import gemm_pkg::*;
#(
  parameter int unsigned M_TILE  = 512,
  parameter int unsigned P_R     = 8,
  parameter int unsigned ROW     = 0,
  parameter int unsigned MUL_LAT = 4,
  parameter int unsigned ADD_LAT = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    step,
  input  a_elem_t a_in,
  output a_elem_t a_out,
  input  b_elem_t b_in,
  output b_elem_t b_out,
  // drain: results of the PEs below
  input  logic    up_in_valid,
  output logic    up_in_ready,
  input  fp128_t  up_in_data,
  // drain: towards the PE above or the Drain module
  output logic    up_out_valid,
  input  logic    up_out_ready,
  output fp128_t  up_out_data,
  output logic    almost_full
);

  localparam int unsigned T_BITS   = (M_TILE > 1) ? $clog2(M_TILE) : 1;
  localparam int unsigned RES_D    = 2 * M_TILE;
  localparam int unsigned RC_W     = $clog2(RES_D + 1);
  localparam int unsigned SLACK    = MUL_LAT + ADD_LAT + 2;

  a_elem_t a_reg;
  b_elem_t b_reg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_reg <= '0;
      b_reg <= '0;
    end else if (step) begin
      a_reg <= a_in;
      b_reg <= b_in;
    end
  end

  assign a_out = a_reg;
  assign b_out = b_reg;

  // ---- multiply-add --------------------------------------------------------
  logic   issue;
  assign issue = step && a_reg.valid;

  logic   mul_valid;
  fp128_t prod;
  fp128_mul #(.LATENCY(MUL_LAT)) u_mul (
    .clk, .rst_n, .in_valid(issue), .a(a_reg.a), .b(b_reg.b),
    .out_valid(mul_valid), .y(prod)
  );

  // Tags travel beside the multiplier and then beside the adder.
  typedef struct packed {
    logic              first;
    logic              last;
    logic [T_BITS-1:0] t;
  } tag_t;

  tag_t tag_m [MUL_LAT];
  tag_t tag_a [ADD_LAT];

  always_ff @(posedge clk) begin
    tag_m[0] <= '{first: a_reg.first, last: a_reg.last, t: a_reg.t[T_BITS-1:0]};
    for (int i = 1; i < int'(MUL_LAT); i++) tag_m[i] <= tag_m[i-1];
    tag_a[0] <= tag_m[MUL_LAT-1];
    for (int i = 1; i < int'(ADD_LAT); i++) tag_a[i] <= tag_a[i-1];
  end

  fp128_t acc [M_TILE];
  fp128_t addend;
  tag_t   tm;
  assign tm     = tag_m[MUL_LAT-1];
  assign addend = tm.first ? make_zero(1'b1) : acc[tm.t];

  logic   sum_valid;
  fp128_t sum;
  fp128_add #(.LATENCY(ADD_LAT)) u_add (
    .clk, .rst_n, .in_valid(mul_valid), .a(prod), .b(addend),
    .out_valid(sum_valid), .y(sum)
  );

  tag_t ta;
  assign ta = tag_a[ADD_LAT-1];

  always_ff @(posedge clk) begin
    if (sum_valid) acc[ta.t] <= sum;
  end

  // ---- result buffer and drain --------------------------------------------
  logic            res_wr, res_rd, res_empty, res_full;
  fp128_t          res_data;
  logic [RC_W-1:0] res_count, res_free;

  assign res_wr = sum_valid && ta.last;

  sync_fifo #(.WIDTH(128), .DEPTH(RES_D)) u_res (
    .clk, .rst_n,
    .wr_en(res_wr), .wr_data(sum),
    .rd_en(res_rd), .rd_data(res_data),
    .empty(res_empty), .full(res_full), .count(res_count), .free(res_free)
  );

  logic own_ready;
  assign res_rd = own_ready && !res_empty;

  ordered_merge #(.WIDTH(128), .N_OWN(M_TILE), .N_PASS(M_TILE * (P_R - 1 - ROW))) u_merge (
    .clk, .rst_n,
    .own_valid(!res_empty), .own_ready, .own_data(res_data),
    .pass_valid(up_in_valid), .pass_ready(up_in_ready), .pass_data(up_in_data),
    .out_valid(up_out_valid), .out_ready(up_out_ready), .out_data(up_out_data)
  );

  assign almost_full = (res_count > RC_W'(RES_D - SLACK));

  initial assert (M_TILE > ADD_LAT + 1)
    else $error("pe: M_TILE must exceed ADD_LAT + 1");
  a_paired: assert property (@(posedge clk) disable iff (!rst_n)
                             step |-> (a_reg.valid == b_reg.valid));
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  res_wr |-> !res_full);

endmodule
