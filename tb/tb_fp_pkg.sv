// tb_fp_pkg: FP32 helpers for the testbenches.
//
// Converts between IEEE 754 single-precision bit patterns and SystemVerilog
// `real` (double) without relying on shortreal support: f2r widens exactly,
// r2f rounds to nearest even (normal range; tiny values flush to zero,
// huge ones become infinity). Used to compute expected results independently
// of the design.
package tb_fp_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic        s;
    int          e;
    logic [23:0] m;
    logic        g, st;
    d = $realtobits(r);
    s = d[63];
    if (d[62:0] == '0) return 32'd0;
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b0, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) m = m + 24'd1;
    if (m[23]) e = e + 1;
    if (e >= 255) return {s, 8'hff, 23'd0};
    if (e <= 0)   return {s, 31'd0};
    return {s, 8'(e), m[22:0]};
  endfunction

endpackage
