// snu_stp: short-term plasticity of one synapse per clock (Tsodyks-Markram
// phenomenological model), advanced once per network timestep:
//   u- = u (1 - 1/tau_f)            spike: u+ = u- + U (1 - u-)   else u+ = u-
//   x- = x + (1 - x)/tau_d          spike: x+ = x- - u+ x-        else x+ = x-
//   S- = S (1 - 1/tau_s)            spike: S+ = S- + A u+ x-      else S+ = S-
// The model's equations print the x jump with a plus sign; the subtraction of the
// original model (which keeps x in [0,1]) is used here. States are Q0.10, the
// per-step factors Q0.16, U and A Q0.10, all truncating with saturation at 1.
// Inputs at t2, outputs LAT = 21 clocks later (t23), the latency printed in the
// synapse unit's block diagram; the arithmetic takes one stage, the rest is delay.
module snu_stp
  import hh_pkg::*;
#(
  parameter int LAT = 21
) (
  input  logic       clk,
  input  logic       spike,
  input  logic [9:0] u, x, s,
  input  logic [9:0] u_inc,       // U
  input  logic [9:0] a_amp,       // A
  input  logic [15:0] dec_f, rec_d, dec_s,
  output logic [9:0] u_new, x_new, s_new
);
  logic [9:0]  um, up, xm, xp, sm, sp, ux;
  logic [10:0] one_m_u, one_m_x;
  logic [21:0] pu;
  logic [26:0] px;
  logic [10:0] xs;
  always_comb begin
    um      = mul10x16(u, dec_f);
    one_m_u = 11'd1024 - {1'b0, um};
    pu      = {11'd0, u_inc} * {11'd0, one_m_u};
    up      = spike ? sat_add10(um, pu[19:10]) : um;
    one_m_x = 11'd1024 - {1'b0, x};
    px      = {16'd0, one_m_x} * {11'd0, rec_d};
    xs      = {1'b0, x} + px[26:16];
    xm      = xs[10] ? 10'h3ff : xs[9:0];
    ux      = mul10x10(up, xm);
    xp      = spike ? xm - ux : xm;
    sm      = mul10x16(s, dec_s);
    sp      = spike ? sat_add10(sm, mul10x10(a_amp, ux)) : sm;
  end
  pipe_delay #(.W(30), .N(LAT)) u_d (.clk, .d({up, xp, sp}), .q({u_new, x_new, s_new}));
endmodule
