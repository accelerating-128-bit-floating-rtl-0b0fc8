// ordered_merge: joins two valid/ready result streams in a fixed order.
//
// Helper for the drain path. In every round it first passes N_OWN words from
// the own input, then N_PASS words from the pass input (the stream relayed
// from the neighbour further away from the Store module), and starts again.
// Because every round has the same fixed order, the receiver can tell from
// the position of a word which PE and which accumulator it came from, so no
// tags travel with the results. The output is registered; a new word can be
// taken in every cycle in which the register is empty or being emptied.
module ordered_merge #(
  parameter int unsigned WIDTH  = 128,
  parameter int unsigned N_OWN  = 4,
  parameter int unsigned N_PASS = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             own_valid,
  output logic             own_ready,
  input  logic [WIDTH-1:0] own_data,
  input  logic             pass_valid,
  output logic             pass_ready,
  input  logic [WIDTH-1:0] pass_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);

  localparam int unsigned TOTAL = N_OWN + N_PASS;
  localparam int unsigned CNT_W = $clog2(TOTAL + 1);

  logic [CNT_W-1:0] cnt;
  logic             sel_own, take, in_valid;
  logic [WIDTH-1:0] in_data;

  assign sel_own    = (cnt < CNT_W'(N_OWN));
  assign in_valid   = sel_own ? own_valid : pass_valid;
  assign in_data    = sel_own ? own_data : pass_data;
  assign take       = in_valid && (!out_valid || out_ready);
  assign own_ready  = sel_own && (!out_valid || out_ready);
  assign pass_ready = !sel_own && (!out_valid || out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      out_valid <= 1'b0;
    end else begin
      if (take) cnt <= (cnt == CNT_W'(TOTAL - 1)) ? '0 : cnt + 1'b1;
      if (take) out_valid <= 1'b1;
      else if (out_ready) out_valid <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (take) out_data <= in_data;
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
