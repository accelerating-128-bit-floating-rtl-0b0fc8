// feed_a: one Feed A stage of the A feed chain (Feed A_IDX).
//
// The stages form a chain from the memory tile down the left edge of the PE
// array: Feed A_0 takes each A column token (P_R values plus the tags) from
// the array controller, and every stage hands it to the next stage one array
// step later. Feed A_IDX gives its own value, element IDX of the column, to
// PE (IDX, 0). Because a token reaches stage IDX IDX steps after stage 0, the
// A values enter PE row IDX with the IDX-step skew a systolic array needs,
// matching the skew the Feed B chain gives the B values.
//
// Interface: chain in/out (valid, first, last, t, col[P_R]), pe_out to the PE;
// everything moves when step is high.
//
// From the paper: the chain of Feed A modules, one per PE row, fed from Read A
// through the buffer. The token format and the step-based skew are this
// design's own choice.
module feed_a
  import fp128_pkg::*;
  import gemm_pkg::*;
#(
  parameter int unsigned P_R = 8,
  parameter int unsigned IDX = 0
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           step,
  input  logic           in_valid,
  input  logic           in_first,
  input  logic           in_last,
  input  logic [T_W-1:0] in_t,
  input  fp128_t         in_col [P_R],
  output logic           out_valid,
  output logic           out_first,
  output logic           out_last,
  output logic [T_W-1:0] out_t,
  output fp128_t         out_col [P_R],
  output a_elem_t        pe_out
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_last  <= 1'b0;
      out_t     <= '0;
    end else if (step) begin
      out_valid <= in_valid;
      out_first <= in_first;
      out_last  <= in_last;
      out_t     <= in_t;
    end
  end

  // The whole column moves on; elements before IDX are not read downstream
  // of this stage and are trimmed away by synthesis.
  always_ff @(posedge clk) begin
    if (step) out_col <= in_col;
  end

  assign pe_out = '{valid: out_valid, first: out_first, last: out_last,
                    t: out_t, a: out_col[IDX]};

endmodule
