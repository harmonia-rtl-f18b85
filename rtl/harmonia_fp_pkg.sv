// harmonia_fp_pkg -- small floating-point helpers used by the accumulator and
// the vector units (FP16 add/sub/multiply, FP32 add, format conversions and the
// integer-with-exponent to FP16 conversion of the INT2Half blocks).
//
// Every function works on an unpacked form, value = (-1)^s * m * 2^e, and
// packs back with truncation (round toward zero).  Subnormal inputs and
// results are flushed to zero and overflow saturates at the largest finite
// value; there is no infinity or NaN.  These numerical rules are this design's
// choice: the paper names the operators but not their rounding.
package harmonia_fp_pkg;

  typedef struct packed {
    logic               s;
    logic signed [15:0] e;
    logic [49:0]        m;
  } uf_t;

  function automatic int msb_pos(logic [49:0] m);
    int p;
    p = -1;
    for (int i = 0; i < 50; i++) if (m[i]) p = i;
    return p;
  endfunction

  function automatic logic [15:0] pack_f16(uf_t u);
    int p, be;
    logic [49:0] t;
    p = msb_pos(u.m);
    if (p < 0) return 16'h0000;
    be = int'(u.e) + p + 15;
    if (be <= 0) return 16'h0000;
    if (be > 30) return {u.s, 15'h7BFF};
    if (p >= 10) t = u.m >> (p - 10);
    else         t = u.m << (10 - p);
    return {u.s, be[4:0], t[9:0]};
  endfunction

  function automatic logic [31:0] pack_f32(uf_t u);
    int p, be;
    logic [49:0] t;
    p = msb_pos(u.m);
    if (p < 0) return 32'h0000_0000;
    be = int'(u.e) + p + 127;
    if (be <= 0) return 32'h0000_0000;
    if (be > 254) return {u.s, 31'h7F7F_FFFF};
    if (p >= 23) t = u.m >> (p - 23);
    else         t = u.m << (23 - p);
    return {u.s, be[7:0], t[22:0]};
  endfunction

  function automatic uf_t unpack_f16(logic [15:0] h);
    uf_t u;
    u.s = h[15];
    u.e = 16'(signed'({11'd0, h[14:10]})) - 16'sd25;
    u.m = (h[14:10] == 5'd0) ? 50'd0 : {39'd0, 1'b1, h[9:0]};
    return u;
  endfunction

  function automatic uf_t unpack_f32(logic [31:0] f);
    uf_t u;
    u.s = f[31];
    u.e = 16'(signed'({8'd0, f[30:23]})) - 16'sd150;
    u.m = (f[30:23] == 8'd0) ? 50'd0 : {26'd0, 1'b1, f[22:0]};
    return u;
  endfunction

  // Sum of two unpacked values whose mantissas fit in 24 bits.
  function automatic uf_t add_uf(uf_t a, uf_t b);
    uf_t r;
    logic [49:0] ma, mb;
    int ea, eb, d;
    if (a.m == 50'd0) return b;
    if (b.m == 50'd0) return a;
    ma = a.m << 24;  ea = int'(a.e) - 24;
    mb = b.m << 24;  eb = int'(b.e) - 24;
    if (ea >= eb) begin
      d  = ea - eb;
      mb = (d >= 50) ? 50'd0 : (mb >> d);
      r.e = 16'(ea);
    end else begin
      d  = eb - ea;
      ma = (d >= 50) ? 50'd0 : (ma >> d);
      r.e = 16'(eb);
    end
    if (a.s == b.s) begin
      r.m = ma + mb; r.s = a.s;
    end else if (ma >= mb) begin
      r.m = ma - mb; r.s = a.s;
    end else begin
      r.m = mb - ma; r.s = b.s;
    end
    return r;
  endfunction

  function automatic logic [15:0] f16_add(logic [15:0] a, logic [15:0] b);
    return pack_f16(add_uf(unpack_f16(a), unpack_f16(b)));
  endfunction

  function automatic logic [15:0] f16_sub(logic [15:0] a, logic [15:0] b);
    return f16_add(a, {~b[15], b[14:0]});
  endfunction

  function automatic logic [15:0] f16_mul(logic [15:0] a, logic [15:0] b);
    uf_t ua, ub, r;
    ua = unpack_f16(a);
    ub = unpack_f16(b);
    r.s = ua.s ^ ub.s;
    r.e = ua.e + ub.e;
    r.m = ua.m * ub.m;
    return pack_f16(r);
  endfunction

  function automatic logic [31:0] f32_add(logic [31:0] a, logic [31:0] b);
    return pack_f32(add_uf(unpack_f32(a), unpack_f32(b)));
  endfunction

  function automatic logic [31:0] f16_to_f32(logic [15:0] h);
    return pack_f32(unpack_f16(h));
  endfunction

  function automatic logic [15:0] f32_to_f16(logic [31:0] f);
    return pack_f16(unpack_f32(f));
  endfunction

  // INT2Half: signed integer v times 2^e, rounded to FP16.
  function automatic logic [15:0] int_to_f16(logic signed [17:0] v, int e);
    uf_t u;
    logic [17:0] mag;
    mag = v[17] ? 18'(-v) : 18'(v);
    u.s = v[17];
    u.e = 16'(e);
    u.m = {32'd0, mag};
    return pack_f16(u);
  endfunction

  // Half of an FP16 value (exponent minus one).
  function automatic logic [15:0] f16_half(logic [15:0] h);
    uf_t u;
    u = unpack_f16(h);
    u.e = u.e - 16'sd1;
    return pack_f16(u);
  endfunction

endpackage
