// dram_model: behavioural model of the board memory as the accelerator sees it.
//
// Not synthesizable; only for the testbenches. One array of 128-bit words with
// three ports: an A read port returning P_R consecutive words per request, a B
// read port returning P_C consecutive words, and a C write port. Reads answer
// in order, RD_LAT cycles after the request. Each port's ready can be pulled
// low at random (busy_pct percent of cycles) to mimic a memory that cannot
// keep up. Addresses outside the array read as zero and writes there are
// counted in bad_writes.
module dram_model
  import fp128_pkg::*;
#(
  parameter int unsigned P_R    = 2,
  parameter int unsigned P_C    = 2,
  parameter int unsigned WORDS  = 8192,
  parameter int unsigned RD_LAT = 8
) (
  input  logic        clk,
  input  int          busy_pct,
  input  logic        a_req_valid,
  output logic        a_req_ready,
  input  logic [31:0] a_req_addr,
  output logic        a_resp_valid,
  output fp128_t      a_resp_data [P_R],
  input  logic        b_req_valid,
  output logic        b_req_ready,
  input  logic [31:0] b_req_addr,
  output logic        b_resp_valid,
  output fp128_t      b_resp_data [P_C],
  input  logic        c_wr_valid,
  output logic        c_wr_ready,
  input  logic [31:0] c_wr_addr,
  input  fp128_t      c_wr_data,
  output int          bad_writes,
  output int          writes
);

  fp128_t mem [WORDS];

  logic        a_v [RD_LAT];
  logic [31:0] a_ad [RD_LAT];
  logic        b_v [RD_LAT];
  logic [31:0] b_ad [RD_LAT];

  function automatic fp128_t rd(logic [31:0] ad);
    return (ad < WORDS) ? mem[ad] : '0;
  endfunction

  initial begin
    bad_writes = 0;
    writes = 0;
    for (int i = 0; i < RD_LAT; i++) begin
      a_v[i] = 1'b0;
      b_v[i] = 1'b0;
      a_ad[i] = '0;
      b_ad[i] = '0;
    end
    a_req_ready = 1'b1;
    b_req_ready = 1'b1;
    c_wr_ready  = 1'b1;
  end

  always @(posedge clk) begin
    if (c_wr_valid && c_wr_ready) begin
      writes++;
      if (c_wr_addr < WORDS) mem[c_wr_addr] = c_wr_data;
      else bad_writes++;
    end
    a_v[0]  <= a_req_valid && a_req_ready;
    a_ad[0] <= a_req_addr;
    b_v[0]  <= b_req_valid && b_req_ready;
    b_ad[0] <= b_req_addr;
    for (int i = 1; i < RD_LAT; i++) begin
      a_v[i]  <= a_v[i-1];
      a_ad[i] <= a_ad[i-1];
      b_v[i]  <= b_v[i-1];
      b_ad[i] <= b_ad[i-1];
    end
    a_req_ready <= ($urandom % 100) >= busy_pct;
    b_req_ready <= ($urandom % 100) >= busy_pct;
    c_wr_ready  <= ($urandom % 100) >= busy_pct;
  end

  always_comb begin
    a_resp_valid = a_v[RD_LAT-1];
    b_resp_valid = b_v[RD_LAT-1];
    for (int i = 0; i < int'(P_R); i++) a_resp_data[i] = rd(a_ad[RD_LAT-1] + 32'(i));
    for (int j = 0; j < int'(P_C); j++) b_resp_data[j] = rd(b_ad[RD_LAT-1] + 32'(j));
  end

endmodule
