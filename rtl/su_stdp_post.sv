// su_stdp_post: postsynaptic spike-timing-dependent-plasticity trace y of one
// neuron (the y equation of the STDP model), advanced once per network timestep:
//   y <- y (1 - 1/tau_-)            then, if the neuron fired in this step,
//   y <- min(y + a_-, 1)
// The amplitude function a_-(y) is not specified for this design; a constant
// increment with saturation is used. y, the decay factor and a_- are Q0.16.
// Combinational; the soma unit calls it once per neuron in the last neuron
// substep of every network timestep, reading and writing the "STDP 1" memory.
module su_stdp_post (
  input  logic [15:0] y_old,
  input  logic        spike,
  input  logic [15:0] dec_minus,
  input  logic [15:0] a_minus,
  output logic [15:0] y_new
);
  logic [31:0] prod;
  logic [16:0] sum;
  always_comb begin
    prod = {16'd0, y_old} * {16'd0, dec_minus};
    sum  = {1'b0, prod[31:16]} + (spike ? {1'b0, a_minus} : 17'd0);
    y_new = sum[16] ? 16'hffff : sum[15:0];
  end
endmodule
