// tb_fp_pkg: conversions between IEEE-754 single bit patterns and real
// numbers, written independently of the design's arithmetic, for use as
// reference models in the testbenches.
package tb_fp_pkg;

  function automatic real fp2real(input logic [31:0] f);
    real m;
    int  e;
    e = int'(f[30:23]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    m = m * (2.0 ** (e - 127));
    return f[31] ? -m : m;
  endfunction

  function automatic logic [31:0] real2fp(input real r);
    logic s;
    real  a;
    int   e;
    longint unsigned m;
    if (r == 0.0) return 32'd0;
    s = (r < 0.0);
    a = s ? -r : r;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    m = longint'((a - 1.0) * 8388608.0 + 0.5);
    if (m >= 64'd8388608) begin m = 0; e++; end
    return {s, 8'(e + 127), m[22:0]};
  endfunction

  // Random FP32 value, uniform in [-scale, scale).
  function automatic logic [31:0] rand_fp(input real scale);
    real u;
    u = (real'($urandom) / 4294967296.0) * 2.0 - 1.0;
    return real2fp(u * scale);
  endfunction

  function automatic real absr(input real r);
    return (r < 0.0) ? -r : r;
  endfunction

endpackage
