// swat_tb_pkg: helpers shared by the SWAT testbenches.
//
// FP16 <-> real conversion (independent of the design's arithmetic), the
// deterministic test data of the Q, K and V matrices, and the reference
// attention computed in double precision.
package swat_tb_pkg;

  function automatic real fp16_to_real(logic [15:0] h);
    real r;
    int  e;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    r = 1.0 + real'(h[9:0]) / 1024.0;
    for (int k = 15; k < e; k++) r = r * 2.0;
    for (int k = e; k < 15; k++) r = r / 2.0;
    return h[15] ? -r : r;
  endfunction

  // nearest FP16 (normal range only, used for test data and expected values)
  function automatic logic [15:0] real_to_fp16(real x);
    real a;
    int  e, m;
    logic s;
    if (x == 0.0) return 16'h0000;
    s = (x < 0.0);
    a = s ? -x : x;
    e = 15;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    m = int'((a - 1.0) * 1024.0);   // int'() of a real rounds to nearest
    if (m == 1024) begin m = 0; e++; end
    if (e <= 0) return {s, 15'd0};
    if (e >= 31) return {s, 15'h7C00};
    return {s, 5'(e), 10'(m)};
  endfunction

  // Test matrices: element e of row tok of matrix mat (0 = Q, 1 = K, 2 = V)
  // is a multiple of 1/32 in [-1/4, 1/4], exact in FP16.
  function automatic int unsigned mix(int unsigned x);
    x = x ^ (x >> 16);
    x = x * 32'h7feb352d;
    x = x ^ (x >> 15);
    x = x * 32'h846ca68b;
    x = x ^ (x >> 16);
    return x;
  endfunction

  function automatic logic [15:0] tb_elem(int mat, int tok, int e);
    int unsigned h;
    h = mix(32'(mat) * 32'h9E3779B9 ^ mix(32'(tok) * 32'd131 + 32'(e)));
    return real_to_fp16((real'(int'(h % 17)) - 8.0) / 32.0);
  endfunction

endpackage
