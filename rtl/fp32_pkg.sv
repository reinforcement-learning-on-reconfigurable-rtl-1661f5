// fp32_pkg: IEEE-754 single-precision helpers for the action head.
//
// The output layer's integers are turned into real numbers, scaled, and
// combined as a = mu + sigma * eps in single-precision floating point, as
// the training side's model does. The functions here are combinational and
// are used between the pipeline registers of action_head:
//   i2f    64-bit signed integer -> float, round to nearest even
//   fmul   float * float, round to nearest even
//   fadd   float + float, round to nearest even
//   f2fix  float -> 16-bit signed fixed point with FRAC fraction bits,
//          rounded half away from zero, saturated
// Simplifications, which the data here never needs: subnormal inputs are
// read as zero and subnormal results are flushed to zero; there is no NaN
// handling; a result above the float range becomes infinity, which f2fix
// saturates.
// Converting the output layer to floating point follows the published
// controller; single precision, the rounding modes and the simplifications
// above are this design's choice.
package fp32_pkg;

  typedef logic [31:0] f32_t;

  localparam f32_t F32_ONE = 32'h3F80_0000;

  // Round a normalised significand. `m` holds the hidden bit at bit 26,
  // 23 fraction bits at 25:3, then guard, round and sticky bits.
  function automatic f32_t pack_round(logic s, int e, logic [26:0] m);
    logic [24:0] r;
    logic        up;
    up = m[2] && (m[1] || m[0] || m[3]);
    r  = {1'b0, m[26:3]} + 25'(up);
    if (r[24]) begin
      r = r >> 1;
      e = e + 1;
    end
    if (e <= 0)   return {s, 31'd0};                 // flush to zero
    if (e >= 255) return {s, 8'hFF, 23'd0};          // infinity
    return {s, 8'(e), r[22:0]};
  endfunction

  function automatic f32_t i2f(logic signed [63:0] v);
    logic        s;
    logic [63:0] mag, nrm;
    int          lz;
    s   = v[63];
    mag = s ? 64'(-v) : 64'(v);
    if (mag == '0) return '0;
    lz = 0;
    for (int i = 63; i >= 0; i--) begin
      if (mag[i]) break;
      lz++;
    end
    nrm = mag << lz;                  // leading one at bit 63
    return pack_round(s, 127 + 63 - lz, {nrm[63:38], |nrm[37:0]});
  endfunction

  function automatic f32_t fmul(f32_t a, f32_t b);
    logic        s;
    logic [47:0] p;
    int          e;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};   // in [2^46, 2^48)
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) return pack_round(s, e + 1, {p[47:22], |p[21:0]});
    else       return pack_round(s, e,     {p[46:21], |p[20:0]});
  endfunction

  function automatic f32_t fadd(f32_t a, f32_t b);
    f32_t        x, y;
    logic [26:0] mx, my, sh;
    logic [27:0] sum;
    int          d, e, lz;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? (a & b) : b;
    if (b[30:23] == 8'd0) return a;
    // x is the operand of larger magnitude.
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    d  = int'(x[30:23]) - int'(y[30:23]);
    e  = int'(x[30:23]);
    if (d > 26) sh = 27'd1;          // only the sticky bit is left
    else begin
      sh = my >> d;
      if ((my & ((27'd1 << d) - 27'd1)) != '0) sh[0] = 1'b1;
    end
    if (x[31] == y[31]) begin
      sum = {1'b0, mx} + {1'b0, sh};
      if (sum[27]) begin
        sum = {1'b0, sum[27:2], sum[1] | sum[0]};
        e = e + 1;
      end
      return pack_round(x[31], e, sum[26:0]);
    end else begin
      sum = {1'b0, mx} - {1'b0, sh};
      if (sum == '0) return '0;
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      return pack_round(x[31], e - lz, sum[26:0]);
    end
  endfunction

  // value * 2^FRAC, rounded half away from zero, saturated to 16 bits.
  function automatic logic signed [15:0] f2fix(f32_t a, int unsigned frac);
    logic [23:0] m;
    logic [40:0] v;
    int          k;
    if (a[30:23] == 8'd0) return '0;
    m = {1'b1, a[22:0]};
    k = 127 + 23 - int'(frac) - int'(a[30:23]);   // right shift of m
    if (k <= -17) v = '1;                          // far too large
    else if (k <= 0) v = 41'(m) << (-k);
    else if (k > 25) v = '0;
    else v = (41'(m) + (41'd1 << (k - 1))) >> k;
    if (a[31]) return (v > 41'd32768) ? 16'sh8000 : 16'(-v);
    else       return (v > 41'd32767) ? 16'sh7FFF : 16'(v);
  endfunction

endpackage
