// fp128_add: pipelined IEEE 754 binary128 add unit.
//
// The operands are aligned in a 232-bit datapath, with the bits shifted out
// folded into a sticky bit, added or subtracted by sign, and the sum is
// normalised and rounded once to nearest-even (fp128_pkg::fp128_add_f). The
// result leaves LATENCY cycles after the operands enter, one operation per
// cycle, with a valid bit alongside. The arithmetic sits in front of a register
// chain of LATENCY stages for a retiming synthesis tool to spread out.
//
// Interface: in_valid/a/b in, out_valid/y out; the pipeline never stalls.
// The binary128 adder is the design's; LATENCY and the register placement are
// this implementation's own choice.
module fp128_add
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

  fp128_t s;
  logic   v_pipe [LATENCY];
  fp128_t y_pipe [LATENCY];

  always_comb s = fp128_add_f(a, b);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(LATENCY); i++) v_pipe[i] <= 1'b0;
    end else begin
      v_pipe[0] <= in_valid;
      for (int i = 1; i < int'(LATENCY); i++) v_pipe[i] <= v_pipe[i-1];
    end
  end

  always_ff @(posedge clk) begin
    y_pipe[0] <= s;
    for (int i = 1; i < int'(LATENCY); i++) y_pipe[i] <= y_pipe[i-1];
  end

  assign out_valid = v_pipe[LATENCY-1];
  assign y         = y_pipe[LATENCY-1];

  initial assert (LATENCY >= 1) else $error("fp128_add: LATENCY must be at least 1");

endmodule
