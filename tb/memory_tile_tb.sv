// memory_tile_tb: self-checking testbench for the A memory tile.
//
// Columns of P_R = 2 distinct values are written while the tile has room
// (the testbench honours `free`, as Read A does) and taken at random. Each
// column must be offered exactly M_TILE = 4 times, with t = 0..3 and
// out_last_use on the last use, in write order, and `free` must always equal
// M_TILE minus the number of stored columns.
module memory_tile_tb;
  import fp128_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned P_R = 2, M = 4, NCOL = 40;

  logic       clk = 1'b0, rst_n = 1'b0;
  logic       wr_valid = 1'b0, take = 1'b0;
  fp128_t     wr_data [P_R];
  logic [2:0] free;
  logic       out_valid, out_last_use;
  fp128_t     out_col [P_R];
  logic [1:0] out_t;
  int checks = 0, failures = 0;
  int written = 0, taken = 0, stored = 0;

  memory_tile #(.P_R(P_R), .M_TILE(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (wr_data[i]) wr_data[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (taken < int'(NCOL * M)) begin
      @(negedge clk);
      checks++;
      if (int'(free) != int'(M) - stored) begin
        failures++;
        $display("FAIL: free %0d, expected %0d", free, int'(M) - stored);
      end
      wr_valid = (written < int'(NCOL)) && (free > 0) && ($urandom % 100 < 50);
      for (int i = 0; i < int'(P_R); i++) wr_data[i] = i2q(longint'(written * 10 + i + 1));
      take = out_valid && ($urandom % 100 < 60);
      if (take) begin
        int col;
        col = taken / int'(M);
        checks++;
        if (out_col[0] !== i2q(longint'(col * 10 + 1)) || out_col[1] !== i2q(longint'(col * 10 + 2))
            || int'(out_t) != taken % int'(M) || out_last_use != (taken % int'(M) == int'(M) - 1)) begin
          failures++;
          $display("FAIL: use %0d: t=%0d last=%0b", taken, out_t, out_last_use);
        end
      end
      @(posedge clk);
      if (wr_valid) begin written++; stored++; end
      if (take) begin
        if (taken % int'(M) == int'(M) - 1) stored--;
        taken++;
      end
    end
    @(negedge clk);
    wr_valid = 1'b0;
    take = 1'b0;
    checks++;
    if (out_valid) begin failures++; $display("FAIL: tile not empty"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
