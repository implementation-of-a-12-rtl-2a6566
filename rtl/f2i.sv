// f2i: converts the single-precision membrane potential V (mV) into the 16-bit
// fixed-point V_post (Q7.8 mV by default) that the synapse units use in the
// membrane equation I = S*w*g*(E - V_post), and that indexes the gate-rate tables.
// The block and its output name come from the soma unit's block diagram; the number
// format, truncation toward zero and saturation at +-128 mV are choices made here.
// Registered: one clock of latency, one conversion per clock.
module f2i
  import hh_fp_pkg::*;
#(
  parameter int FRAC_BITS = 8
) (
  input  logic               clk,
  input  f32_t               i_fp,
  output logic signed [15:0] o_fix
);
  always_ff @(posedge clk) o_fix <= f2fix16(i_fp, FRAC_BITS);
endmodule
