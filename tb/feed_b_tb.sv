// feed_b_tb: self-checking testbench for a Feed B stage.
//
// Stage IDX = 2 of a 4-column chain gets random row segments and random
// steps. After each step its chain output must equal the segment that entered
// at that step and its PE output must carry element IDX with the valid bit.
module feed_b_tb;
  import fp128_pkg::*;
  import gemm_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned P_C = 4, IDX = 2;

  logic    clk = 1'b0, rst_n = 1'b0, step = 1'b0, in_valid = 1'b0;
  fp128_t  in_row [P_C];
  logic    out_valid;
  fp128_t  out_row [P_C];
  b_elem_t pe_out;
  int checks = 0, failures = 0;
  logic    e_valid = 1'b0;
  fp128_t  e_row [P_C];

  feed_b #(.P_C(P_C), .IDX(IDX)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (in_row[i]) in_row[i] = '0;
    foreach (e_row[i]) e_row[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      step     = ($urandom % 100) < 70;
      in_valid = 1'($urandom);
      foreach (in_row[i]) in_row[i] = i2q(-longint'($urandom % 1000) - 1);
      if (step) begin
        e_valid = in_valid;
        e_row   = in_row;
      end
      @(posedge clk);
      #1;
      checks++;
      if (out_valid != e_valid || out_row[IDX] != e_row[IDX] || out_row[IDX+1] != e_row[IDX+1]) begin
        failures++;
        $display("FAIL: chain output differs at %0d", n);
      end
      checks++;
      if (pe_out.valid != e_valid || pe_out.b != e_row[IDX]) begin
        failures++;
        $display("FAIL: PE output differs at %0d", n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
