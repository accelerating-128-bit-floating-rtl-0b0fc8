// tb_fp_pkg: testbench helpers that build binary128 values without using the
// design's arithmetic. i2q converts a 64-bit integer exactly.
package tb_fp_pkg;
  import fp128_pkg::*;

  function automatic fp128_t i2q(longint v);
    fp128_t       q;
    longint       mag;
    int           p;
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

endpackage
