// fp128_mul: pipelined IEEE 754 binary128 multiply unit.
//
// The product of a and b is formed exactly (113 x 113 bit significand product)
// and rounded once to nearest-even by fp128_pkg::fp128_mul_f. The result leaves
// LATENCY cycles after the operands enter, one operation per cycle, with a
// valid bit alongside. The arithmetic sits in front of a register chain of
// LATENCY stages, so a synthesis tool with retiming can spread it over them.
//
// Interface: in_valid/a/b in, out_valid/y out. No stall: the pipeline always
// advances. The design needs a binary128 multiplier in every PE; the number of
// stages (LATENCY) and the register placement are this design's own choice.
module fp128_mul
  import fp128_pkg::*;
#(
  parameter int unsigned LATENCY = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  fp128_t a,
  input  fp128_t b,
  output logic   out_valid,
  output fp128_t y
);

  fp128_t p;
  logic   v_pipe [LATENCY];
  fp128_t y_pipe [LATENCY];

  always_comb p = fp128_mul_f(a, b);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(LATENCY); i++) v_pipe[i] <= 1'b0;
    end else begin
      v_pipe[0] <= in_valid;
      for (int i = 1; i < int'(LATENCY); i++) v_pipe[i] <= v_pipe[i-1];
    end
  end

  always_ff @(posedge clk) begin
    y_pipe[0] <= p;
    for (int i = 1; i < int'(LATENCY); i++) y_pipe[i] <= y_pipe[i-1];
  end

  assign out_valid = v_pipe[LATENCY-1];
  assign y         = y_pipe[LATENCY-1];

  initial assert (LATENCY >= 1) else $error("fp128_mul: LATENCY must be at least 1");

endmodule
