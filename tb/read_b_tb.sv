// read_b_tb: self-checking testbench for Read B.
//
// A 2 x 2 array with M_TILE = 4 reads a 2 x 12 B (ldb = 20, at word 50) for a
// C of 2 row blocks by 2 column blocks (n = 12, so the second column block is
// half padding). The memory model holds each word's own address as its value
// and is randomly busy; the testbench plays a 4-deep queue that drains at
// random. Checked: every segment, in order (rb, cb, p, t), with the columns
// past n zeroed, and that the queue is never overfilled.
module read_b_tb;
  import fp128_pkg::*;
  import gemm_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned P_R = 2, P_C = 2, M = 4, QD = 4;

  logic        clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  gemm_cfg_t   cfg;
  logic        req_valid, req_ready, resp_valid, q_wr_valid;
  logic [31:0] req_addr;
  fp128_t      resp_data [P_C];
  fp128_t      q_wr_data [P_C];
  logic [2:0]  q_free;
  logic        a_req_ready, a_resp_valid, c_wr_ready;
  fp128_t      a_resp_data [P_R];
  int          bad_writes, writes, busy_pct = 30;
  int checks = 0, failures = 0, stored = 0, n_seg = 0;

  read_b #(.P_R(P_R), .P_C(P_C), .M_TILE(M), .Q_DEPTH(QD)) dut (
    .clk, .rst_n, .start, .cfg, .req_valid, .req_ready, .req_addr,
    .resp_valid, .resp_data, .q_wr_valid, .q_wr_data, .q_free
  );

  dram_model #(.P_R(P_R), .P_C(P_C), .WORDS(256), .RD_LAT(5)) mem (
    .clk, .busy_pct,
    .a_req_valid(1'b0), .a_req_ready, .a_req_addr(32'd0), .a_resp_valid, .a_resp_data,
    .b_req_valid(req_valid), .b_req_ready(req_ready), .b_req_addr(req_addr),
    .b_resp_valid(resp_valid), .b_resp_data(resp_data),
    .c_wr_valid(1'b0), .c_wr_ready, .c_wr_addr(32'd0), .c_wr_data('0), .bad_writes, .writes
  );

  always #5 clk = ~clk;
  assign q_free = 3'(int'(QD) - stored);

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    logic consume;
    consume = (stored > 0) && ($urandom % 100 < 40);
    if (rst_n && q_wr_valid) begin
      int cb, p, t, c;
      t  = n_seg % 4;
      p  = (n_seg / 4) % 2;
      cb = (n_seg / 8) % 2;
      for (int j = 0; j < int'(P_C); j++) begin
        c = cb * 8 + t * 2 + j;
        checks++;
        if (q_wr_data[j] !== ((c < 12) ? i2q(longint'(50 + p * 20 + c)) : '0)) begin
          failures++;
          $display("FAIL: segment %0d lane %0d: %h", n_seg, j, q_wr_data[j]);
        end
      end
      n_seg++;
    end
    stored <= stored + int'(rst_n && q_wr_valid) - int'(consume);
    checks++;
    if (stored > int'(QD)) begin
      failures++;
      $display("FAIL: queue overfilled");
    end
  end

  initial begin
    for (int i = 0; i < 256; i++) mem.mem[i] = i2q(longint'(i));
    cfg = '{m: 3, n: 12, k: 2, lda: 0, ldb: 20, ldc: 0, a_base: 0, b_base: 50, c_base: 0};
    repeat (10) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    repeat (600) @(negedge clk);
    checks++;
    if (n_seg != 32) begin
      failures++;
      $display("FAIL: %0d segments read, expected 32", n_seg);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
