// fp32_pkg: IEEE-754 single-precision multiply and add used by the
// accumulate logic (the SLS weight and the embedding values are FP32).
//
// Both functions round to nearest, ties to even. Subnormal inputs are read
// as zero and subnormal results are flushed to zero; results that overflow
// become infinity; NaN inputs are not treated specially. Embedding sums stay
// far from those ranges. These simplifications are this design's; the paper
// only states that weights are FP32.
//
// Timing: pure combinational functions; the caller decides the pipelining
// (the accumulate unit uses one multiply-add per lane per cycle).
package fp32_pkg;

  function automatic logic [31:0] fp32_mul(logic [31:0] a, logic [31:0] b);
    logic        s;
    logic [7:0]  ea, eb;
    logic [47:0] p;
    logic [23:0] m;
    logic        g, st, up;
    logic signed [10:0] e;
    logic [24:0] mr;
    s  = a[31] ^ b[31];
    ea = a[30:23];
    eb = b[30:23];
    if (ea == 8'd0 || eb == 8'd0) return {s, 31'd0};
    if (ea == 8'hFF || eb == 8'hFF) return {s, 8'hFF, 23'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = 11'(ea) + 11'(eb) - 11'sd127;
    if (p[47]) begin
      m  = p[47:24];
      g  = p[23];
      st = |p[22:0];
      e  = e + 11'sd1;
    end else begin
      m  = p[46:23];
      g  = p[22];
      st = |p[21:0];
    end
    up = g && (st || m[0]);
    mr = {1'b0, m} + 25'(up);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 11'sd1;
    end
    if (e >= 11'sd255) return {s, 8'hFF, 23'd0};
    if (e <= 11'sd0)   return {s, 31'd0};
    return {s, e[7:0], mr[22:0]};
  endfunction

  function automatic logic [31:0] fp32_add(logic [31:0] a, logic [31:0] b);
    logic [31:0] x, y;
    logic [7:0]  ex, ey, d;
    logic [26:0] mx, my, sh;
    logic        stk, sub, g, rest, up;
    logic [27:0] sum;
    logic signed [10:0] e;
    logic [24:0] mr;
    int          lz;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? {a[31] & b[31], 31'd0} : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:23] == 8'hFF) return a;
    if (b[30:23] == 8'hFF) return b;
    // x is the operand of larger magnitude
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    ex = x[30:23];
    ey = y[30:23];
    d  = ex - ey;
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    if (d >= 8'd27) begin
      sh  = 27'd0;
      stk = 1'b1;
    end else begin
      sh  = my >> d;
      stk = |(my & ((27'd1 << d) - 27'd1));
    end
    sh[0] = sh[0] | stk;
    sub = x[31] ^ y[31];
    e   = 11'(ex);
    sum = sub ? ({1'b0, mx} - {1'b0, sh}) : ({1'b0, mx} + {1'b0, sh});
    if (sum == 28'd0) return 32'd0;
    if (sum[27]) begin
      sum = {1'b0, sum[27:2], sum[1] | sum[0]};
      e   = e + 11'sd1;
    end else begin
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      e   = e - 11'(lz);
    end
    g    = sum[2];
    rest = sum[1] | sum[0];
    up   = g && (rest || sum[3]);
    mr   = {1'b0, sum[26:3]} + 25'(up);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 11'sd1;
    end
    if (e >= 11'sd255) return {x[31], 8'hFF, 23'd0};
    if (e <= 11'sd0)   return {x[31], 31'd0};
    return {x[31], e[7:0], mr[22:0]};
  endfunction

endpackage
