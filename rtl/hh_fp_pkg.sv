// hh_fp_pkg: single-precision floating-point arithmetic for the soma unit.
//
// The Hodgkin-Huxley equations of the soma unit are computed entirely in IEEE-754
// single precision, as the design prescribes. This package provides the operators
// as synthesizable functions, so each pipeline stage of the soma unit can chain the
// few operations it needs inside one clock:
//   fadd / fsub / fmul  : add, subtract, multiply
//   fix2f               : signed fixed-point (32 bit, FRAC fraction bits) to float
//   f2fix16             : float to signed 16-bit fixed point (FRAC bits), saturating
//   r2f                 : constant conversion of a real, for elaboration-time tables
// Simplifications chosen here (not prescribed): results are rounded half-up on the
// guard bit, subnormal numbers are flushed to zero, and overflow saturates to the
// largest finite value; there is no Inf or NaN. Membrane potentials, gates and
// currents of an HH neuron stay many orders of magnitude inside that range.
package hh_fp_pkg;

  typedef logic [31:0] f32_t;

  localparam f32_t F_ZERO = 32'h0000_0000;
  localparam f32_t F_ONE  = 32'h3f80_0000;
  localparam f32_t F_MAX  = 32'h7f7f_ffff;

  // Pack sign, unbiased-plus-127 exponent and 24-bit mantissa (leading 1 at bit 23)
  // into a float, with flush-to-zero and saturation.
  function automatic f32_t fpack(input logic s, input int e, input logic [23:0] m);
    if (e <= 0)   return F_ZERO;
    if (e >= 255) return {s, F_MAX[30:0]};
    return {s, e[7:0], m[22:0]};
  endfunction

  function automatic f32_t fadd(input f32_t a, input f32_t b);
    f32_t        x, y;
    logic [26:0] mx, my;          // 1.23 mantissa followed by guard, round, sticky
    logic [27:0] sum;
    logic [24:0] rnd;
    int          d, e;
    logic        stk;
    // x is the operand of larger magnitude
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    if (x[30:23] == 8'd0) return F_ZERO;
    if (y[30:23] == 8'd0) return x;
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    d  = int'(x[30:23]) - int'(y[30:23]);
    if (d > 26) my = 27'd1;
    else if (d > 0) begin
      stk = 1'b0;
      for (int i = 0; i < 27; i++) if (i < d && my[i]) stk = 1'b1;
      my = (my >> d) | {26'd0, stk};
    end
    if (x[31] == y[31]) sum = {1'b0, mx} + {1'b0, my};
    else                sum = {1'b0, mx} - {1'b0, my};
    if (sum == 28'd0) return F_ZERO;
    e = int'(x[30:23]);
    if (sum[27]) begin
      sum = {1'b0, sum[27:2], sum[1] | sum[0]};
      e   = e + 1;
    end else begin
      // normalise left until the leading one is at bit 26 (at most 26 shifts)
      for (int i = 0; i < 26; i++) begin
        if (!sum[26]) begin
          sum = sum << 1;
          e   = e - 1;
        end
      end
    end
    rnd = {1'b0, sum[26:3]} + {24'd0, sum[2]};
    if (rnd[24]) begin
      rnd = rnd >> 1;
      e   = e + 1;
    end
    return fpack(x[31], e, rnd[23:0]);
  endfunction

  function automatic f32_t fsub(input f32_t a, input f32_t b);
    return fadd(a, {~b[31], b[30:0]});
  endfunction

  function automatic f32_t fmul(input f32_t a, input f32_t b);
    logic [47:0] prod;
    logic [24:0] rnd;
    int          e;
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return F_ZERO;
    prod = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    e    = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (prod[47]) begin
      rnd = {1'b0, prod[47:24]} + {24'd0, prod[23]};
      e   = e + 1;
    end else begin
      rnd = {1'b0, prod[46:23]} + {24'd0, prod[22]};
    end
    if (rnd[24]) begin
      rnd = rnd >> 1;
      e   = e + 1;
    end
    return fpack(a[31] ^ b[31], e, rnd[23:0]);
  endfunction

  // Signed 32-bit fixed point with FRAC fraction bits to float.
  function automatic f32_t fix2f(input logic signed [31:0] v, input int frac);
    logic [31:0] mag;
    logic [24:0] rnd;
    int          msb, e;
    logic [31:0] norm;
    if (v == 0) return F_ZERO;
    mag = v[31] ? 32'(-v) : 32'(v);
    msb = 0;
    for (int i = 0; i < 32; i++) if (mag[i]) msb = i;
    norm = mag << (31 - msb);     // leading one at bit 31
    rnd  = {1'b0, norm[31:8]} + {24'd0, norm[7]};
    e    = msb + 127 - frac;
    if (rnd[24]) begin
      rnd = rnd >> 1;
      e   = e + 1;
    end
    return fpack(v[31], e, rnd[23:0]);
  endfunction

  // Float to signed 16-bit fixed point with FRAC fraction bits, truncating toward
  // zero and saturating at the ends of the range.
  function automatic logic signed [15:0] f2fix16(input f32_t f, input int frac);
    int          sh;
    logic [55:0] mag;
    logic [15:0] r;
    if (f[30:23] == 8'd0) return 16'sd0;
    sh = int'(f[30:23]) - 127 - 23 + frac;   // value = mant * 2^sh
    if (sh >= 0) begin
      if (sh > 15) mag = 56'hff_ffff_ffff_ffff;
      else         mag = {32'd0, 1'b1, f[22:0]} << sh;
    end else begin
      if (sh < -24) mag = 56'd0;
      else          mag = {32'd0, 1'b1, f[22:0]} >> (-sh);
    end
    if (f[31]) begin
      if (mag > 56'd32768) return 16'sh8000;
      r = 16'(-mag[15:0]);
    end else begin
      if (mag > 56'd32767) return 16'sh7fff;
      r = mag[15:0];
    end
    return r;
  endfunction

  // Real to float, for constants computed at elaboration (truncating).
  function automatic f32_t r2f(input real v);
    logic [63:0] d;
    int          e;
    d = $realtobits(v);
    e = int'(d[62:52]) - 1023 + 127;
    if (d[62:52] == 11'd0 || e <= 0) return F_ZERO;
    if (e >= 255) return {d[63], F_MAX[30:0]};
    return {d[63], e[7:0], d[51:29]};
  endfunction

endpackage
