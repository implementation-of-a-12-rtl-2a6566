// snu_ltp: long-term plasticity (STDP) of one synapse per clock, once per network
// timestep:
//   x_j- = x_j (1 - 1/tau_+)
//   postsynaptic spike:  w <- w + (w_max - w) eta_+ x_j-     (A_+(w) x)
//   presynaptic spike:   w <- w - w eta_- y                  (A_-(w) y)
//                        x_j+ = min(x_j- + a_+, 1)
// y is the postsynaptic trace kept by the soma unit (Q0.16, top 10 bits used).
// a_+(x_j) is not specified for this design; a constant increment is used. States
// Q0.10, truncating. Inputs at t2, outputs LAT = 21 clocks later (t23), the latency
// printed in the synapse unit's block diagram.
module snu_ltp
  import hh_pkg::*;
#(
  parameter int LAT = 21
) (
  input  logic        clk,
  input  logic        spike,        // delayed presynaptic spike
  input  logic        spike_post,
  input  logic [15:0] stdp_post,    // y
  input  logic [9:0]  xj, w,
  input  logic [9:0]  a_plus, eta_plus, eta_minus, wmax,
  input  logic [15:0] dec_plus,
  output logic [9:0]  xj_new, w_new
);
  logic [9:0] xjm, xjp, w1, w2, room;
  always_comb begin
    xjm  = mul10x16(xj, dec_plus);
    room = (wmax > w) ? wmax - w : 10'd0;
    w1   = spike_post ? sat_add10(w, mul10x10(mul10x10(room, eta_plus), xjm)) : w;
    w2   = spike ? w1 - mul10x10(mul10x10(w1, eta_minus), stdp_post[15:6]) : w1;
    xjp  = spike ? sat_add10(xjm, a_plus) : xjm;
  end
  pipe_delay #(.W(20), .N(LAT)) u_d (.clk, .d({xjp, w2}), .q({xj_new, w_new}));
endmodule
