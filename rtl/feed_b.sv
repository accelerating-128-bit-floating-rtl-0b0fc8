// feed_b: one Feed B stage of the B feed chain (Feed B_IDX).
//
// The stages form a chain along the top edge of the PE array: Feed B_0 takes
// each B row segment (P_C values, one per PE column) from the B queue, and
// every stage hands it to the next stage one array step later. Feed B_IDX
// gives element IDX to PE (0, IDX). The one-step delay per stage gives PE
// column IDX the IDX-step skew that matches the Feed A chain, so PE (i, j)
// sees A and B values of the same term in the same step.
//
// Interface: chain in/out (valid, row[P_C]) and pe_out to the PE; everything
// moves when step is high.
//
// From the paper: the chain of Feed B modules, one per PE column, fed by Read
// B. The step-based skew is this design's own choice.
module feed_b
  import fp128_pkg::*;
  import gemm_pkg::*;
#(
  parameter int unsigned P_C = 16,
  parameter int unsigned IDX = 0
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    step,
  input  logic    in_valid,
  input  fp128_t  in_row [P_C],
  output logic    out_valid,
  output fp128_t  out_row [P_C],
  output b_elem_t pe_out
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (step) out_valid <= in_valid;
  end

  // Elements before IDX are not read after this stage; synthesis trims them.
  always_ff @(posedge clk) begin
    if (step) out_row <= in_row;
  end

  assign pe_out = '{valid: out_valid, b: out_row[IDX]};

endmodule
