// fp128_mul_tb: self-checking testbench for the binary128 multiply unit.
//
// Random operands are doubles with 26-bit significands, so their product is
// exact in double precision and, converted bit by bit to binary128, is the
// exact expected result. Directed cases, worked out by hand, cover
// round-to-nearest-even (below half, and a tie), signed zero, infinity, NaN,
// subnormal results, subnormal inputs and overflow. One operation enters every
// other cycle and every result must leave exactly LATENCY cycles later.
module fp128_mul_tb;
  import fp128_pkg::*;

  localparam int unsigned LAT = 4;
  localparam int NRAND = 2000;

  logic   clk = 1'b0;
  logic   rst_n = 1'b0;
  logic   in_valid;
  fp128_t a, b, y;
  logic   out_valid;
  int     checks = 0, failures = 0;
  int     cycle = 0;

  fp128_t exp_q[$];
  int     when_q[$];

  fp128_mul #(.LATENCY(LAT)) dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) cycle <= cycle + 1;

  // Exact conversion of a normal double (or zero) to binary128.
  function automatic fp128_t d2q(real r);
    logic [63:0] bits;
    fp128_t      q;
    bits   = $realtobits(r);
    q.sign = bits[63];
    if (bits[62:0] == '0) begin
      q.exp  = '0;
      q.frac = '0;
    end else begin
      q.exp  = 15'(int'(bits[62:52]) - 1023 + 16383);
      q.frac = {bits[51:0], 60'b0};
    end
    return q;
  endfunction

  function automatic real rand_double(int mant_bits, int emin, int emax);
    logic [63:0] bits;
    int          e;
    e          = emin + int'($urandom % 32'(emax - emin + 1));
    bits[63]   = 1'($urandom);
    bits[62:52] = 11'(e + 1023);
    bits[51:0] = 52'($urandom) << (52 - (mant_bits - 1));
    bits[51:0] = bits[51:0] & ~(52'hF_FFFF_FFFF_FFFF >> (mant_bits - 1));
    return $bitstoreal(bits);
  endfunction

  function automatic fp128_t q(logic s, int e, logic [111:0] f);
    fp128_t r;
    r.sign = s;
    r.exp  = 15'(e);
    r.frac = f;
    return r;
  endfunction

  // Operands are driven on the falling edge, away from the sampling edge.
  task automatic issue(fp128_t x, fp128_t z, fp128_t expect_y);
    @(negedge clk);
    in_valid = 1'b1;
    a        = x;
    b        = z;
    exp_q.push_back(expect_y);
    when_q.push_back(cycle);
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  // Result checker: value and latency.
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      fp128_t e;
      int     w;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected result %h", y);
      end else begin
        e = exp_q.pop_front();
        w = when_q.pop_front();
        if (y !== e) begin
          failures++;
          $display("FAIL: got %h expected %h", y, e);
        end
        checks++;
        if (cycle - w != int'(LAT)) begin
          failures++;
          $display("FAIL: latency %0d expected %0d", cycle - w, LAT);
        end
      end
    end
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real x, z;
    in_valid = 1'b0;
    a = '0;
    b = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // Directed cases.
    // (1+2^-112)^2 = 1 + 2^-111 + 2^-224: below half an ulp, rounds down.
    issue(q(0, 16383, 112'd1), q(0, 16383, 112'd1), q(0, 16383, 112'd2));
    // (1+2^-112)*1.5 = 1.5 + 2^-112 + 2^-113: a tie with an odd lsb, rounds up.
    issue(q(0, 16383, 112'd1), q(0, 16383, 112'd1 << 111),
          q(0, 16383, (112'd1 << 111) | 112'd2));
    // Sign and special values.
    issue(q(0, 16384, '0), q(1, 16384, '0), q(1, 16385, '0));           // 2 * -2 = -4
    issue(q(0, 32767, '0), q(0, 0, '0), FP128_QNAN);                     // inf * 0
    issue(q(0, 32767, '0), q(1, 16384, '0), q(1, 32767, '0));           // inf * -2
    issue(q(0, 32767, 112'd5), q(0, 16383, '0), FP128_QNAN);            // NaN * 1
    issue(q(0, 0, '0), q(1, 16384, 112'd1 << 111), q(1, 0, '0));        // 0 * -3 = -0
    // Subnormal result: 2^-16382 * 0.5 = 2^-16383.
    issue(q(0, 1, '0), q(0, 16382, '0), q(0, 0, 112'd1 << 111));
    // Subnormal input: 2^-16494 * 2^112 = 2^-16382.
    issue(q(0, 0, 112'd1), q(0, 16383 + 112, '0), q(0, 1, '0));
    // Overflow to infinity.
    issue(q(1, 32766, '1), q(0, 16384, '0), q(1, 32767, '0));
    // Underflow of a tiny product rounds to zero.
    issue(q(0, 1, '0), q(0, 100, '0), q(0, 0, '0));
    // Random exact products.
    for (int i = 0; i < NRAND; i++) begin
      x = rand_double(26, -300, 300);
      z = rand_double(26, -300, 300);
      issue(d2q(x), d2q(z), d2q(x * z));
    end
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL: %0d results missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
