// tb_fp_pkg: reference number conversions for the testbenches, written with `real` arithmetic
// so that checks do not reuse the arithmetic of the design under test.
package tb_fp_pkg;

  function automatic real fp16_real(input logic [15:0] h);
    int e;
    real v;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    v = (1.0 + real'(h[9:0]) / 1024.0) * (2.0 ** (e - 15));
    return h[15] ? -v : v;
  endfunction

  function automatic real fp32_real(input logic [31:0] f);
    int e;
    real v;
    e = int'(f[30:23]);
    if (e == 0) return 0.0;
    v = (1.0 + real'(f[22:0]) / 8388608.0) * (2.0 ** (e - 127));
    return f[31] ? -v : v;
  endfunction

  // nearest FP16 (normal range only), used to build stimulus from real values
  function automatic logic [15:0] real_fp16(input real r);
    logic s;
    int e;
    real a;
    int m;
    s = (r < 0.0);
    a = s ? -r : r;
    if (a < 6.2e-5) return {s, 15'd0};
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0) begin a = a * 2.0; e--; end
    m = int'((a - 1.0) * 1024.0);   // rounds to nearest
    if (m == 1024) begin m = 0; e++; end
    if (e + 15 >= 31) return {s, 5'h1e, 10'h3ff};
    return {s, 5'(e + 15), 10'(m)};
  endfunction

  // random normal FP16 with exponent field in [lo, hi]
  function automatic logic [15:0] rand_fp16(input int lo, input int hi);
    logic [15:0] h;
    h[15] = 1'($urandom);
    h[14:10] = 5'(lo + int'($urandom % 32'(hi - lo + 1)));
    h[9:0] = 10'($urandom);
    return h;
  endfunction

  function automatic real rabs(input real r);
    return (r < 0.0) ? -r : r;
  endfunction

endpackage
