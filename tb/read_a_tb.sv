// read_a_tb: self-checking testbench for Read A.
//
// A 2-row, 2-column array with M_TILE = 4 reads a 3 x 3 A (lda = 5, at word
// 100) for a C that is 2 row blocks by 2 column blocks. The memory model holds
// each word's own address as its value and is randomly busy; the testbench
// plays the tile, consuming columns at random and reporting `free`. Checked:
// every column written to the tile, in order (rb, cb, p), with the rows past m
// zeroed, and that the tile is never overfilled.
module read_a_tb;
  import fp128_pkg::*;
  import gemm_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned P_R = 2, P_C = 2, M = 4;

  logic        clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  gemm_cfg_t   cfg;
  logic        req_valid, req_ready, resp_valid, tile_wr_valid;
  logic [31:0] req_addr;
  fp128_t      resp_data [P_R];
  fp128_t      tile_wr_data [P_R];
  logic [2:0]  tile_free;
  logic        b_req_ready, b_resp_valid, c_wr_ready;
  fp128_t      b_resp_data [P_C];
  int          bad_writes, writes, busy_pct = 30;
  int checks = 0, failures = 0, stored = 0, n_col = 0;

  read_a #(.P_R(P_R), .P_C(P_C), .M_TILE(M)) dut (
    .clk, .rst_n, .start, .cfg, .req_valid, .req_ready, .req_addr,
    .resp_valid, .resp_data, .tile_wr_valid, .tile_wr_data, .tile_free
  );

  dram_model #(.P_R(P_R), .P_C(P_C), .WORDS(256), .RD_LAT(5)) mem (
    .clk, .busy_pct,
    .a_req_valid(req_valid), .a_req_ready(req_ready), .a_req_addr(req_addr),
    .a_resp_valid(resp_valid), .a_resp_data(resp_data),
    .b_req_valid(1'b0), .b_req_ready, .b_req_addr(32'd0), .b_resp_valid, .b_resp_data,
    .c_wr_valid(1'b0), .c_wr_ready, .c_wr_addr(32'd0), .c_wr_data('0), .bad_writes, .writes
  );

  always #5 clk = ~clk;
  assign tile_free = 3'(int'(M) - stored);

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Tile model and checks.
  always @(posedge clk) begin
    logic consume;
    consume = (stored > 0) && ($urandom % 100 < 40);
    if (rst_n && tile_wr_valid) begin
      int rb, p, r;
      rb = n_col / 6;            // 2 column blocks x 3 columns of A
      p  = n_col % 3;
      for (int i = 0; i < int'(P_R); i++) begin
        r = rb * int'(P_R) + i;
        checks++;
        if (tile_wr_data[i] !== ((r < 3) ? i2q(longint'(100 + p * 5 + r)) : '0)) begin
          failures++;
          $display("FAIL: column %0d row %0d: %h", n_col, i, tile_wr_data[i]);
        end
      end
      n_col++;
    end
    stored <= stored + int'(rst_n && tile_wr_valid) - int'(consume);
    checks++;
    if (stored > int'(M)) begin
      failures++;
      $display("FAIL: tile overfilled");
    end
  end

  initial begin
    for (int i = 0; i < 256; i++) mem.mem[i] = i2q(longint'(i));
    cfg = '{m: 3, n: 12, k: 3, lda: 5, ldb: 0, ldc: 0, a_base: 100, b_base: 0, c_base: 0};
    repeat (10) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    repeat (400) @(negedge clk);
    checks++;
    if (n_col != 12) begin
      failures++;
      $display("FAIL: %0d columns read, expected 12", n_col);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
