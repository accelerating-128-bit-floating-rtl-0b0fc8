// drain_c_tb: self-checking testbench for a Drain C stage.
//
// Drain C_0 of a 2-row, 3-column array with M_TILE = 2 must send, per block,
// the 4 results of its own column and then the 8 results relayed from the
// columns to its right. Both inputs offer numbered values at random times and
// the output is randomly blocked; the output sequence must follow that order
// exactly, with no value lost or repeated, and must hold still while blocked.
module drain_c_tb;
  import fp128_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned P_R = 2, P_C = 3, M = 2, NBLK = 6;
  localparam int unsigned OWN = P_R * M, PASS = P_R * M * (P_C - 1);

  logic   clk = 1'b0, rst_n = 1'b0;
  logic   col_valid = 1'b0, col_ready, chain_in_valid = 1'b0, chain_in_ready;
  fp128_t col_data = '0, chain_in_data = '0;
  logic   out_valid, out_ready = 1'b0;
  fp128_t out_data;
  int checks = 0, failures = 0;
  int n_own = 0, n_pass = 0, n_out = 0;
  logic fire_own = 1'b0, fire_pass = 1'b0;

  drain_c #(.P_R(P_R), .P_C(P_C), .M_TILE(M), .IDX(0)) dut (.*);

  always #5 clk = ~clk;

  // Expected n-th output: block b, position q within the block.
  function automatic longint expect_val(int n);
    int b, q;
    b = n / int'(OWN + PASS);
    q = n % int'(OWN + PASS);
    if (q < int'(OWN)) return longint'(1000 + b * int'(OWN) + q);
    return longint'(-(1000 + b * int'(PASS) + q - int'(OWN)));
  endfunction

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (n_out < int'(NBLK * (OWN + PASS))) begin
      @(negedge clk);
      if (fire_own) col_valid = 1'b0;
      if (fire_pass) chain_in_valid = 1'b0;
      if (!col_valid && n_own < int'(NBLK * OWN) && ($urandom % 100 < 50)) begin
        col_valid = 1'b1;
        col_data  = i2q(longint'(1000 + n_own));
      end
      if (!chain_in_valid && n_pass < int'(NBLK * PASS) && ($urandom % 100 < 70)) begin
        chain_in_valid = 1'b1;
        chain_in_data  = i2q(-longint'(1000 + n_pass));
      end
      out_ready = ($urandom % 100) < 60;
      #1;
      // Handshakes are sampled before the clock edge, when they are settled.
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== i2q(expect_val(n_out))) begin
          failures++;
          $display("FAIL: output %0d is %h", n_out, out_data);
        end
        n_out++;
      end
      if (col_valid && col_ready) begin n_own++; fire_own = 1'b1; end
      else fire_own = 1'b0;
      if (chain_in_valid && chain_in_ready) begin n_pass++; fire_pass = 1'b1; end
      else fire_pass = 1'b0;
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
