// Reference conversions between real (double) and single-precision bit
// patterns, built from the double's fields. Round to nearest even; results
// below the normal range become zero and above it infinity, as in fp32_pkg.
function automatic logic [31:0] r2f(real x);
  logic [63:0] b;
  logic [24:0] m;
  logic        g, st;
  int          e;
  b = $realtobits(x);
  if (b[62:52] == 11'd0) return {b[63], 31'd0};
  e  = int'(b[62:52]) - 1023 + 127;
  m  = {2'b01, b[51:29]};
  g  = b[28];
  st = |b[27:0];
  if (g && (st || m[0])) m = m + 25'd1;
  if (m[24]) begin
    m = m >> 1;
    e = e + 1;
  end
  if (e <= 0)   return {b[63], 31'd0};
  if (e >= 255) return {b[63], 8'hFF, 23'd0};
  return {b[63], 8'(e), m[22:0]};
endfunction

function automatic real f2r(logic [31:0] f);
  if (f[30:23] == 8'd0) return 0.0;
  return $bitstoreal({f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0});
endfunction
