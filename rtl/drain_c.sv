// drain_c: Drain C_IDX, the collector at the top of PE column IDX.
//
// It takes the results coming up PE column IDX (P_R*M_TILE per block, in the
// order PE row 0, 1, ..., P_R-1 and within a PE accumulator t = 0..M_TILE-1)
// and puts them on the drain chain that runs along the top of the array
// towards the Store module. In every block it first sends its own column's
// results and then relays the results of the columns further right
// (IDX+1 .. P_C-1), which arrive from Drain C_(IDX+1). Drain C_0 feeds Store.
// All links are valid/ready handshakes with a register in each stage.
//
// From the paper: one Drain module per PE column, chained to Store C. The
// fixed order of the results, which lets Store work out addresses without
// tags, is this design's own choice.
module drain_c
  import fp128_pkg::*;
#(
  parameter int unsigned P_R    = 8,
  parameter int unsigned P_C    = 16,
  parameter int unsigned M_TILE = 512,
  parameter int unsigned IDX    = 0
) (
  input  logic   clk,
  input  logic   rst_n,
  // from PE (0, IDX)
  input  logic   col_valid,
  output logic   col_ready,
  input  fp128_t col_data,
  // from Drain C_(IDX+1)
  input  logic   chain_in_valid,
  output logic   chain_in_ready,
  input  fp128_t chain_in_data,
  // towards Drain C_(IDX-1) or Store C
  output logic   out_valid,
  input  logic   out_ready,
  output fp128_t out_data
);

  ordered_merge #(
    .WIDTH(128), .N_OWN(P_R * M_TILE), .N_PASS(P_R * M_TILE * (P_C - 1 - IDX))
  ) u_merge (
    .clk, .rst_n,
    .own_valid(col_valid), .own_ready(col_ready), .own_data(col_data),
    .pass_valid(chain_in_valid), .pass_ready(chain_in_ready), .pass_data(chain_in_data),
    .out_valid, .out_ready, .out_data
  );

endmodule
