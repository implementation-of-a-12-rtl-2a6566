// i2f: converts the fixed-point dendrite sum (Netsum) into a single-precision
// current for the Hodgkin-Huxley operators of the soma unit ("I2F" of the soma
// unit's block diagram). Input: signed 32-bit with FRAC_BITS fraction bits (Q23.8 by
// default, a format chosen here). Output: IEEE-754 single, rounded half-up,
// registered: one clock of latency, one conversion per clock.
module i2f
  import hh_fp_pkg::*;
#(
  parameter int FRAC_BITS = 8
) (
  input  logic               clk,
  input  logic signed [31:0] i_fix,
  output f32_t               o_fp
);
  always_ff @(posedge clk) o_fp <= fix2f(i_fix, FRAC_BITS);
endmodule
