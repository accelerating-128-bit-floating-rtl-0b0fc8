// store_c_tb: self-checking testbench for Store C.
//
// A 2 x 2 array with M_TILE = 2 delivers the results of a 3 x 6 C (ldc = 4,
// at word 10) in drain order: 2 row blocks x 2 column blocks x column j x
// row i x accumulator t. Result number s carries the value s. The write port
// is randomly busy. Checked: each element lands at c_base + col*ldc + row
// with the value of its position in the drain order, results of padding rows
// and columns are dropped, nothing else is written, and done rises at the end.
module store_c_tb;
  import fp128_pkg::*;
  import gemm_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned P_R = 2, P_C = 2, M = 2;
  localparam int NRES = 2 * 2 * 2 * 2 * 2;

  logic        clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  gemm_cfg_t   cfg;
  logic        in_valid = 1'b0, in_ready, wr_valid, wr_ready = 1'b0, done, skip;
  fp128_t      in_data = '0, wr_data;
  logic [31:0] wr_addr;
  int checks = 0, failures = 0, sent = 0, n_wr = 0, n_skip = 0;
  fp128_t      cmem [64];
  logic        fire = 1'b0;

  store_c #(.P_R(P_R), .P_C(P_C), .M_TILE(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && wr_valid && wr_ready) begin
      n_wr++;
      if (wr_addr < 64) cmem[wr_addr] = wr_data;
    end
    if (rst_n && skip) n_skip++;
  end

  initial begin
    foreach (cmem[i]) cmem[i] = '0;
    cfg = '{m: 3, n: 6, k: 1, lda: 0, ldb: 0, ldc: 4, a_base: 0, b_base: 0, c_base: 10};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (sent < NRES) begin
      @(negedge clk);
      if (fire) sent++;
      if (sent == NRES) begin
        in_valid = 1'b0;
        break;
      end
      // an offered result stays offered until it is taken
      if (!in_valid || fire) in_valid = ($urandom % 100) < 70;
      in_data  = i2q(longint'(sent + 1));
      wr_ready = ($urandom % 100) < 60;
      #1;
      fire = in_valid && in_ready;
      checks++;
      if (done) begin
        failures++;
        $display("FAIL: done before the last result");
      end
    end
    @(negedge clk);
    checks++;
    if (!done) begin
      failures++;
      $display("FAIL: done not raised");
    end
    // Expected placement, worked out from the drain order.
    for (int s = 0; s < NRES; s++) begin
      int t, i, j, cb, rb, row, col;
      t  = s % 2;
      i  = (s / 2) % 2;
      j  = (s / 4) % 2;
      cb = (s / 8) % 2;
      rb = s / 16;
      row = rb * 2 + i;
      col = cb * 4 + t * 2 + j;
      if (row < 3 && col < 6) begin
        checks++;
        if (cmem[10 + col * 4 + row] !== i2q(longint'(s + 1))) begin
          failures++;
          $display("FAIL: C(%0d,%0d) = %h", row, col, cmem[10 + col * 4 + row]);
        end
      end
    end
    checks++;
    if (n_wr != 18 || n_skip != NRES - 18) begin
      failures++;
      $display("FAIL: %0d writes and %0d dropped, expected 18 and %0d", n_wr, n_skip, NRES - 18);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
