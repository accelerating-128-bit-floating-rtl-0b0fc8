// gemm_top_full_tb: one complete multiply on the accelerator at its default
// size: 8 x 16 PEs with M_TILE = 512, so one C block is 8 x 8192.
//
// The operation is C' = A B with m = 8, n = 8192 and k = 3, integer-valued
// operands (exact in binary128) and an always-ready memory model. Every C
// element is checked against 64-bit integer arithmetic, and the gap words
// between the columns of C must stay untouched. The cycle count is printed
// and checked against the time it takes to drain the block through Store.
module gemm_top_full_tb;
  import fp128_pkg::*;
  import gemm_pkg::*;

  localparam int unsigned P_R = 8, P_C = 16, M_TILE = 512;
  localparam int unsigned WORDS = 131072;
  localparam logic [127:0] SENTINEL = 128'h3FFF_DEAD_BEEF_0000_0000_0000_0000_0001;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        start = 1'b0;
  gemm_cfg_t   cfg;
  logic        busy, done;
  logic        a_req_valid, a_req_ready, a_resp_valid;
  logic [31:0] a_req_addr;
  fp128_t      a_resp_data [P_R];
  logic        b_req_valid, b_req_ready, b_resp_valid;
  logic [31:0] b_req_addr;
  fp128_t      b_resp_data [P_C];
  logic        c_wr_valid, c_wr_ready;
  logic [31:0] c_wr_addr;
  fp128_t      c_wr_data;
  int          busy_pct = 0;
  int          bad_writes, writes;

  int checks = 0, failures = 0;
  int n_hold = 0, n_bubble = 0, n_skip = 0, n_reuse = 0, n_multi_cb = 0, n_multi_rb = 0;
  int n_take = 0, first_take = -1, last_take = -1, cycle = 0;

  gemm_top dut (.*);

  dram_model #(.P_R(P_R), .P_C(P_C), .WORDS(WORDS), .RD_LAT(8)) mem (
    .clk, .busy_pct,
    .a_req_valid, .a_req_ready, .a_req_addr, .a_resp_valid, .a_resp_data,
    .b_req_valid, .b_req_ready, .b_req_addr, .b_resp_valid, .b_resp_data,
    .c_wr_valid, .c_wr_ready, .c_wr_addr, .c_wr_data, .bad_writes, .writes
  );

  always #5 clk = ~clk;

  // Mechanism counters.
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && busy) begin
      if (dut.hold) n_hold++;
      if (dut.step && !dut.take && dut.tile_valid == 1'b0) n_bubble++;
      if (dut.store_skip) n_skip++;
      if (dut.take && !dut.tile_last_use) n_reuse++;
      if (dut.take) begin
        n_take++;
        if (first_take < 0) first_take = cycle;
        last_take = cycle;
      end
    end
  end

  function automatic fp128_t i2q(longint v);
    fp128_t      q;
    longint      mag;
    int          p;
    logic [111:0] f;
    q = '0;
    if (v == 0) return q;
    q.sign = (v < 0);
    mag = (v < 0) ? -v : v;
    p = 0;
    for (int i = 0; i < 63; i++) if (mag[i]) p = i;
    f = 112'(mag) << (112 - p);
    q.exp  = 15'(16383 + p);
    q.frac = f;
    return q;
  endfunction

  task automatic run_case(int m, int n, int k, int pct, int range_v);
    longint A [][];
    longint B [][];
    longint acc;
    int lda, ldb, ldc, ab, bb, cb;
    int t0, errs;
    lda = m + 1;
    ldb = n + 2;
    ldc = m + 3;
    ab = 0;
    bb = ab + lda * k + 4;
    cb = bb + ldb * k + 4;
    if (cb + ldc * n + 4 > int'(WORDS)) begin
      $display("FAIL: case does not fit in the memory model");
      failures++;
      return;
    end
    A = new[m];
    foreach (A[r]) begin
      A[r] = new[k];
      foreach (A[r][p]) A[r][p] = longint'($urandom % (2 * range_v + 1)) - range_v;
    end
    B = new[k];
    foreach (B[p]) begin
      B[p] = new[n];
      foreach (B[p][c]) B[p][c] = longint'($urandom % (2 * range_v + 1)) - range_v;
    end
    for (int i = 0; i < int'(WORDS); i++) mem.mem[i] = SENTINEL;
    for (int r = 0; r < m; r++)
      for (int p = 0; p < k; p++) mem.mem[ab + p * lda + r] = i2q(A[r][p]);
    for (int p = 0; p < k; p++)
      for (int c = 0; c < n; c++) mem.mem[bb + p * ldb + c] = i2q(B[p][c]);
    busy_pct = pct;
    cfg = '{m: m, n: n, k: k, lda: lda, ldb: ldb, ldc: ldc,
            a_base: ab, b_base: bb, c_base: cb};
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t0 = cycle;
    if ((n + P_C * M_TILE - 1) / (P_C * M_TILE) > 1) n_multi_cb++;
    if ((m + P_R - 1) / P_R > 1) n_multi_rb++;
    wait (done);
    @(negedge clk);
    errs = 0;
    for (int r = 0; r < m; r++)
      for (int c = 0; c < n; c++) begin
        acc = 0;
        for (int p = 0; p < k; p++) acc += A[r][p] * B[p][c];
        checks++;
        if (mem.mem[cb + c * ldc + r] !== i2q(acc)) begin
          failures++;
          if (errs++ < 5)
            $display("FAIL: C(%0d,%0d) = %h expected %h", r, c, mem.mem[cb + c * ldc + r], i2q(acc));
        end
      end
    // The gap rows between columns of C must stay untouched.
    for (int c = 0; c < n; c++)
      for (int r = m; r < ldc; r++) begin
        checks++;
        if (mem.mem[cb + c * ldc + r] !== SENTINEL) begin
          failures++;
          $display("FAIL: padding word C(%0d,%0d) written", r, c);
        end
      end
    $display("case m=%0d n=%0d k=%0d busy=%0d%%: %0d cycles", m, n, k, pct, cycle - t0);
  endtask

  initial begin
    #5_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    run_case(8, 8192, 3, 0, 1000);
    // The block's 65536 results leave through Store at one per cycle.
    checks++;
    if (cycle - first_take < 65536 || cycle - first_take > 65536 + 3 * 512 + 2000) begin
      failures++;
      $display("FAIL: %0d cycles from first term to done", cycle - first_take);
    end
    checks++;
    if (n_take != 3 * 512) begin
      failures++;
      $display("FAIL: %0d terms issued, expected %0d", n_take, 3 * 512);
    end
    checks++;
    if (bad_writes != 0) begin
      failures++;
      $display("FAIL: %0d writes outside memory", bad_writes);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
