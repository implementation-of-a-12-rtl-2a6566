// hh_core: advances one Hodgkin-Huxley neuron by one neuron timestep per clock.
//
//   C_m dV/dt = I_ext - g_Na m^3 h (V - E_Na) - g_K n^4 (V - E_K) - g_L (V - E_L)
//   dx/dt     = a_x (1 - x) - b_x x,   x in {n, m, h}
//
// integrated with forward Euler over dt (the neuron timestep, 0.04 ms by default),
// all in single precision. The design gives the equations and the Na, K and leak
// currents; the Euler method, the exponents m^3 h and n^4 of the classic model and
// C_m = 1 uF/cm^2 (so dt stands for dt/C_m) are this implementation's choices.
// Pipeline of LAT = 4 stages, one neuron per clock, no stall:
//   1: new gates; n^2, m^2; V-E_Na, V-E_K; leak current
//   2: n^4, m^3 h; g_Na (V-E_Na), g_K (V-E_K)
//   3: total ion current
//   4: V + dt (I_ext - I_ion)
// The gates used for the currents are the values at the start of the step.
module hh_core
  import hh_fp_pkg::*;
  import hh_pkg::*;
(
  input  logic          clk,
  input  neuron_state_t in_st,
  input  f32_t          rates [6],    // a_n, b_n, a_m, b_m, a_h, b_h
  input  f32_t          i_ext,
  input  neuron_set_t   attr,
  output neuron_state_t out_st        // 4 clocks after the inputs
);
  localparam int LAT = 4;

  function automatic f32_t gate_step(input f32_t x, input f32_t a, input f32_t b, input f32_t dt);
    f32_t dx;
    dx = fsub(fmul(a, fsub(F_ONE, x)), fmul(b, x));
    return fadd(x, fmul(dt, dx));
  endfunction

  // stage 1
  f32_t s1_v, s1_n, s1_m, s1_h, s1_n2, s1_m2, s1_m0, s1_h0, s1_vna, s1_vk, s1_il, s1_iext, s1_dt, s1_gna, s1_gk;
  always_ff @(posedge clk) begin
    s1_v    <= in_st.v;
    s1_n    <= gate_step(in_st.n, rates[0], rates[1], attr.dt);
    s1_m    <= gate_step(in_st.m, rates[2], rates[3], attr.dt);
    s1_h    <= gate_step(in_st.h, rates[4], rates[5], attr.dt);
    s1_n2   <= fmul(in_st.n, in_st.n);
    s1_m2   <= fmul(in_st.m, in_st.m);
    s1_m0   <= in_st.m;
    s1_h0   <= in_st.h;
    s1_vna  <= fsub(in_st.v, attr.ena);
    s1_vk   <= fsub(in_st.v, attr.ek);
    s1_il   <= fmul(attr.gl, fsub(in_st.v, attr.el));
    s1_iext <= i_ext;
    s1_dt   <= attr.dt;
    s1_gna  <= attr.gna;
    s1_gk   <= attr.gk;
  end

  // stage 2
  f32_t s2_v, s2_n, s2_m, s2_h, s2_n4, s2_m3h, s2_gvna, s2_gvk, s2_il, s2_iext, s2_dt;
  always_ff @(posedge clk) begin
    s2_v    <= s1_v;
    s2_n    <= s1_n;
    s2_m    <= s1_m;
    s2_h    <= s1_h;
    s2_n4   <= fmul(s1_n2, s1_n2);
    s2_m3h  <= fmul(fmul(s1_m2, s1_m0), s1_h0);
    s2_gvna <= fmul(s1_gna, s1_vna);
    s2_gvk  <= fmul(s1_gk, s1_vk);
    s2_il   <= s1_il;
    s2_iext <= s1_iext;
    s2_dt   <= s1_dt;
  end

  // stage 3
  f32_t s3_v, s3_n, s3_m, s3_h, s3_iion, s3_iext, s3_dt;
  always_ff @(posedge clk) begin
    s3_v    <= s2_v;
    s3_n    <= s2_n;
    s3_m    <= s2_m;
    s3_h    <= s2_h;
    s3_iion <= fadd(fadd(fmul(s2_m3h, s2_gvna), fmul(s2_n4, s2_gvk)), s2_il);
    s3_iext <= s2_iext;
    s3_dt   <= s2_dt;
  end

  // stage 4
  always_ff @(posedge clk) begin
    out_st.v <= fadd(s3_v, fmul(s3_dt, fsub(s3_iext, s3_iion)));
    out_st.n <= s3_n;
    out_st.m <= s3_m;
    out_st.h <= s3_h;
  end
endmodule
