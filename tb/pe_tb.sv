// pe_tb: self-checking testbench for one processing element.
//
// A single PE (top row of a one-row array, M_TILE = 16) receives two blocks of
// k = 3 terms for each of its 16 accumulators, with integer operands so that
// the expected dot products are exact. Steps are skipped at random and the
// drain port is blocked at first, so the result buffer fills and the PE must
// raise almost_full; the testbench then stops stepping, as the array
// controller does. Checked: every result value and its order, the A and B
// values handed on to the neighbours one step later, and that almost_full was
// seen.
module pe_tb;
  import fp128_pkg::*;
  import gemm_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned M = 16, K = 3, NBLK = 2;

  logic    clk = 1'b0, rst_n = 1'b0, step;
  a_elem_t a_in, a_out;
  b_elem_t b_in, b_out;
  logic    up_in_valid, up_in_ready, up_out_valid, up_out_ready, almost_full;
  fp128_t  up_in_data, up_out_data;
  int      checks = 0, failures = 0, n_af = 0;
  longint  exp_res [$];
  a_elem_t prev_a = '0;
  b_elem_t prev_b = '0;
  logic    blocked = 1'b1;

  pe #(.M_TILE(M), .P_R(1), .ROW(0), .MUL_LAT(4), .ADD_LAT(4)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Results and forwarding checks.
  always @(posedge clk) begin
    if (rst_n) begin
      if (almost_full) n_af++;
      if (up_out_valid && up_out_ready) begin
        checks++;
        if (exp_res.size() == 0) begin
          failures++;
          $display("FAIL: extra result");
        end else begin
          longint e;
          e = exp_res.pop_front();
          if (up_out_data !== i2q(e)) begin
            failures++;
            $display("FAIL: result %h expected %h", up_out_data, i2q(e));
          end
        end
      end
    end
  end

  initial begin
    longint av [NBLK][K][M];
    longint bv [NBLK][K][M];
    longint s;
    up_in_valid = 1'b0;
    up_in_data  = '0;
    up_out_ready = 1'b0;
    step = 1'b0;
    a_in = '0;
    b_in = '0;
    for (int bl = 0; bl < int'(NBLK); bl++)
      for (int t = 0; t < int'(M); t++) begin
        s = 0;
        for (int p = 0; p < int'(K); p++) begin
          av[bl][p][t] = longint'($urandom % 201) - 100;
          bv[bl][p][t] = longint'($urandom % 201) - 100;
          s += av[bl][p][t] * bv[bl][p][t];
        end
        exp_res.push_back(s);
      end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    fork
      begin
        // drain side: blocked for a while, then random ready
        repeat (150) @(negedge clk);
        blocked = 1'b0;
        forever begin
          @(negedge clk);
          up_out_ready = ($urandom % 100) < 60;
        end
      end
      begin
        for (int bl = 0; bl < int'(NBLK); bl++)
          for (int p = 0; p < int'(K); p++)
            for (int t = 0; t < int'(M); t++) begin
              // wait for a step that the PE allows
              forever begin
                @(negedge clk);
                step = !almost_full && (($urandom % 100) < 80);
                if (!step) begin
                  a_in = '0;
                  b_in = '0;
                end else break;
              end
              a_in = '{valid: 1'b1, first: (p == 0), last: (p == int'(K) - 1),
                       t: T_W'(t), a: i2q(av[bl][p][t])};
              b_in = '{valid: 1'b1, b: i2q(bv[bl][p][t])};
            end
        @(negedge clk);
        a_in = '0;
        b_in = '0;
        // keep stepping so the pipeline empties
        repeat (400) begin
          step = !almost_full;
          @(negedge clk);
        end
        checks++;
        if (exp_res.size() != 0) begin
          failures++;
          $display("FAIL: %0d results missing", exp_res.size());
        end
        checks++;
        if (n_af == 0) begin
          failures++;
          $display("FAIL: almost_full never raised");
        end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    join
  end

  // Forwarding: a_out/b_out show what entered at the previous step.
  always @(posedge clk) begin
    if (rst_n && step) begin
      prev_a <= a_in;
      prev_b <= b_in;
    end
  end
  always @(negedge clk) begin
    if (rst_n && prev_a.valid) begin
      checks++;
      if (a_out !== prev_a || b_out !== prev_b) begin
        failures++;
        $display("FAIL: forwarded values differ");
      end
    end
  end

endmodule
