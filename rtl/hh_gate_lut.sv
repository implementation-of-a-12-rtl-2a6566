// hh_gate_lut: the six Hodgkin-Huxley rate functions alpha_n, beta_n, alpha_m,
// beta_m, alpha_h, beta_h (1/ms) at the present membrane potential.
//
// The design leaves the gate functions to the classic model; this block uses the
// Hodgkin-Huxley squid-axon rates with the resting potential at -65 mV:
//   a_n = 0.01(V+55)/(1-exp(-(V+55)/10))   b_n = 0.125 exp(-(V+65)/80)
//   a_m = 0.1 (V+40)/(1-exp(-(V+40)/10))   b_m = 4 exp(-(V+65)/18)
//   a_h = 0.07 exp(-(V+65)/20)             b_h = 1/(1+exp(-(V+35)/10))
// How the rates are evaluated is this implementation's choice: each is a ROM of
// ENTRIES single-precision words computed at elaboration from the formulas above,
// sampled at the middle of 0.25 mV bins from -128 mV. The input is V in Q7.8 mV, so
// the index is simply its top 10 bits offset by 128 mV. One lookup per clock,
// registered output (latency 1).
module hh_gate_lut
  import hh_fp_pkg::*;
#(
  parameter int ENTRIES = 1024
) (
  input  logic               clk,
  input  logic signed [15:0] v_fix,
  output f32_t               rates [6]   // a_n, b_n, a_m, b_m, a_h, b_h
);
  localparam int IW = $clog2(ENTRIES);
  typedef f32_t tab_t [ENTRIES];

  function automatic real rate(input int k, input real v);
    case (k)
      0: return 0.01 * (v + 55.0) / (1.0 - $exp(-(v + 55.0) / 10.0));
      1: return 0.125 * $exp(-(v + 65.0) / 80.0);
      2: return 0.1 * (v + 40.0) / (1.0 - $exp(-(v + 40.0) / 10.0));
      3: return 4.0 * $exp(-(v + 65.0) / 18.0);
      4: return 0.07 * $exp(-(v + 65.0) / 20.0);
      default: return 1.0 / (1.0 + $exp(-(v + 35.0) / 10.0));
    endcase
  endfunction

  function automatic tab_t mk_tab(input int k);
    tab_t t;
    for (int i = 0; i < ENTRIES; i++)
      t[i] = r2f(rate(k, -128.0 + (real'(i) + 0.5) * (256.0 / real'(ENTRIES))));
    return t;
  endfunction

  localparam tab_t T_AN = mk_tab(0);
  localparam tab_t T_BN = mk_tab(1);
  localparam tab_t T_AM = mk_tab(2);
  localparam tab_t T_BM = mk_tab(3);
  localparam tab_t T_AH = mk_tab(4);
  localparam tab_t T_BH = mk_tab(5);

  logic [15:0]   v_off;
  logic [IW-1:0] idx;
  assign v_off = v_fix + 16'sh8000;         // 0 at -128 mV
  assign idx   = v_off[15 -: IW];

  always_ff @(posedge clk) begin
    rates[0] <= T_AN[idx];
    rates[1] <= T_BN[idx];
    rates[2] <= T_AM[idx];
    rates[3] <= T_BM[idx];
    rates[4] <= T_AH[idx];
    rates[5] <= T_BH[idx];
  end
endmodule
