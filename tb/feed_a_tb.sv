// feed_a_tb: self-checking testbench for a Feed A stage.
//
// Stage IDX = 1 of a 3-row chain gets random column tokens and random steps.
// After each step its chain output must equal the token that entered at that
// step, and its PE output must carry element IDX of that column with the same
// valid, first, last and t tags. Without a step nothing may change.
module feed_a_tb;
  import fp128_pkg::*;
  import gemm_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned P_R = 3, IDX = 1;

  logic           clk = 1'b0, rst_n = 1'b0, step = 1'b0;
  logic           in_valid = 1'b0, in_first = 1'b0, in_last = 1'b0;
  logic [T_W-1:0] in_t = '0;
  fp128_t         in_col [P_R];
  logic           out_valid, out_first, out_last;
  logic [T_W-1:0] out_t;
  fp128_t         out_col [P_R];
  a_elem_t        pe_out;
  int checks = 0, failures = 0;
  logic           e_valid = 1'b0, e_first = 1'b0, e_last = 1'b0;
  logic [T_W-1:0] e_t = '0;
  fp128_t         e_col [P_R];

  feed_a #(.P_R(P_R), .IDX(IDX)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (in_col[i]) in_col[i] = '0;
    foreach (e_col[i]) e_col[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      step     = ($urandom % 100) < 70;
      in_valid = 1'($urandom);
      in_first = 1'($urandom);
      in_last  = 1'($urandom);
      in_t     = T_W'($urandom);
      foreach (in_col[i]) in_col[i] = i2q(longint'($urandom % 1000) + 1);
      if (step) begin
        e_valid = in_valid;
        e_first = in_first;
        e_last  = in_last;
        e_t     = in_t;
        e_col   = in_col;
      end
      @(posedge clk);
      #1;
      checks++;
      if (out_valid != e_valid || out_first != e_first || out_last != e_last || out_t != e_t
          || out_col[IDX] != e_col[IDX] || out_col[IDX+1] != e_col[IDX+1]) begin
        failures++;
        $display("FAIL: chain output differs at %0d", n);
      end
      checks++;
      if (pe_out.valid != e_valid || pe_out.first != e_first || pe_out.last != e_last
          || pe_out.t != e_t || pe_out.a != e_col[IDX]) begin
        failures++;
        $display("FAIL: PE output differs at %0d", n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
