// snu_membrane: synaptic current of one synapse per clock,
//   I_syn = S * w * g_syn * (E_syn - V_post)
// S, w Q0.10; g_syn Q4.12; E_syn, V_post Q7.8 mV; I_syn Q23.8 (with g in mS/cm^2
// and V in mV, uA/cm^2). Fixed point is this implementation's choice. Inputs at
// t23, output LAT = 8 clocks later (t31), the latency printed in the synapse unit's
// block diagram. A synapse whose attribute set has g_syn = 0 (a null synapse)
// always gives 0.
module snu_membrane
  import hh_pkg::*;
#(
  parameter int LAT = 8
) (
  input  logic               clk,
  input  logic [9:0]         s, w,
  input  logic [15:0]        gsyn,
  input  logic signed [15:0] esyn,
  input  logic signed [15:0] v_post,
  output logic signed [31:0] isyn
);
  logic [9:0]         sw;
  logic [25:0]        g26;
  logic signed [16:0] dv;
  logic signed [33:0] prod;
  logic signed [31:0] i_c;
  always_comb begin
    sw   = mul10x10(s, w);
    g26  = {16'd0, sw} * {10'd0, gsyn};             // Q4.22
    dv   = 17'(esyn) - 17'(v_post);                  // Q8.8
    prod = $signed({1'b0, g26[25:10]}) * 34'(dv);    // Q4.12 x Q8.8 = Q.20
    i_c  = 32'(prod >>> 12);
  end
  pipe_delay #(.W(32), .N(LAT)) u_d (.clk, .d(i_c), .q(isyn));
endmodule
