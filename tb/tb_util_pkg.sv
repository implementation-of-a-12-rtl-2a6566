// tb_util_pkg: helpers shared by the testbenches: exact conversion of IEEE single
// bits to and from real (independent of the design's float functions), and a
// relative-error comparison.
package tb_util_pkg;

  function automatic real f2r(input logic [31:0] f);
    real m;
    int  e;
    if (f[30:23] == 8'd0) return 0.0;
    m = real'({1'b1, f[22:0]});
    e = int'(f[30:23]) - 150;
    m = m * (2.0 ** e);
    return f[31] ? -m : m;
  endfunction

  // round to nearest single precision
  function automatic logic [31:0] r2f(input real v);
    logic [63:0] d;
    logic [24:0] m;
    int          e;
    d = $realtobits(v);
    if (d[62:52] == 11'd0) return 32'd0;
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b0, 1'b1, d[51:29]} + {24'd0, d[28]};
    if (m[24]) begin m = m >> 1; e = e + 1; end
    if (e <= 0) return 32'd0;
    return {d[63], e[7:0], m[22:0]};
  endfunction

  function automatic bit close(input real a, input real b, input real rel, input real abs_tol);
    real d, s;
    d = a - b; if (d < 0) d = -d;
    s = b;     if (s < 0) s = -s;
    return d <= abs_tol || d <= rel * s;
  endfunction

  // classic HH rates, V in mV, 1/ms
  function automatic real hh_rate(input int k, input real v);
    case (k)
      0: return 0.01 * (v + 55.0) / (1.0 - $exp(-(v + 55.0) / 10.0));
      1: return 0.125 * $exp(-(v + 65.0) / 80.0);
      2: return 0.1 * (v + 40.0) / (1.0 - $exp(-(v + 40.0) / 10.0));
      3: return 4.0 * $exp(-(v + 65.0) / 18.0);
      4: return 0.07 * $exp(-(v + 65.0) / 20.0);
      default: return 1.0 / (1.0 + $exp(-(v + 35.0) / 10.0));
    endcase
  endfunction

  // V in mV -> centre of its 0.25 mV rate-table bin (the table's sampling points)
  function automatic real bin_centre(input real v);
    int q;
    q = $rtoi((v + 128.0) * 4.0 + 1000.0) - 1000;   // floor
    return -128.0 + (real'(q) + 0.5) * 0.25;
  endfunction

endpackage
