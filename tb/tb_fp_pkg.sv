// tb_fp_pkg: reference FP32 arithmetic for the testbenches, computed through
// the simulator's double-precision reals, independent of the RTL's integer
// implementation. A product of two FP32 values is exact in double precision
// and one conversion back rounds it to nearest-even; a sum is exact as long
// as the operands' exponents differ by less than 29, which the generated
// test values respect.
//
// Interface: functions only, no state and no timing. The reference is this
// design's own; the paper states only that weights and rows are FP32.
package tb_fp_pkg;

  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(f[30:23]) - 11'd127 + 11'd1023, f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    logic [23:0] m;
    logic        g, st;
    int          e;
    if (r == 0.0) return 32'd0;
    d  = $realtobits(r);
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b1, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) begin
      m = m + 1'b1;
      if (m == 24'd0) e++;   // 1.111..1 rounded up to 10.0
    end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] ref_mac(logic [31:0] acc, logic [31:0] w, logic [31:0] x);
    return r2f(f2r(acc) + f2r(r2f(f2r(w) * f2r(x))));
  endfunction

  // random FP32 value with magnitude in [2^lo_e, 2^(hi_e+1))
  function automatic logic [31:0] rand_f(int lo_e, int hi_e, bit allow_neg);
    logic [31:0] f;
    f[31]    = allow_neg ? 1'($urandom) : 1'b0;
    f[30:23] = 8'(127 + lo_e + int'($urandom % (hi_e - lo_e + 1)));
    f[22:0]  = 23'($urandom);
    return f;
  endfunction

  // Content of CXL memory in the device models: every 32-bit word holds a
  // small integer in [-64, 64] as FP32, derived from its byte address, so
  // that weighted sums with power-of-two weights are exact in any order.
  function automatic logic [31:0] mem_word(logic [45:0] a);
    logic [31:0] h;
    h = 32'(a[45:2]) * 32'h9E3779B1;
    h = h ^ (h >> 15);
    return r2f(real'(int'(h % 129) - 64));
  endfunction

endpackage
