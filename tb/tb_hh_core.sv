// tb_hh_core: streams random neuron states, rates and input currents through
// hh_core, one per clock, and checks each result, 4 clocks later, against a
// forward-Euler Hodgkin-Huxley step computed in double precision.
module tb_hh_core;
  import hh_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  neuron_state_t in_st, out_st;
  logic [31:0]   rates [6];
  logic [31:0]   i_ext;
  neuron_set_t   attr;
  hh_core dut (.clk, .in_st, .rates, .i_ext, .attr, .out_st);

  typedef struct { real v, n, m, h; } exp_t;
  exp_t q [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real pick(input real lo, input real hi);
    return lo + (hi - lo) * real'($urandom_range(1000000, 0)) / 1000000.0;
  endfunction

  initial begin
    real v, n, m, h, ie, r[6], dt, ina, ik, il;
    exp_t e;
    dt = 0.04;
    attr = '{gna: r2f(120.0), ena: r2f(50.0), gk: r2f(36.0), ek: r2f(-77.0),
             gl: r2f(0.3), el: r2f(-54.387), dt: r2f(dt), dec_minus: 16'd0, a_minus: 16'd0};
    for (int i = 0; i < 2004; i++) begin
      @(negedge clk);
      if (i < 2000) begin
        v = f2r(r2f(pick(-90.0, 40.0)));
        n = f2r(r2f(pick(0.0, 1.0)));
        m = f2r(r2f(pick(0.0, 1.0)));
        h = f2r(r2f(pick(0.0, 1.0)));
        ie = f2r(r2f(pick(-20.0, 40.0)));
        for (int k = 0; k < 6; k++) begin
          r[k] = f2r(r2f(hh_rate(k, v)));
          rates[k] = r2f(r[k]);
        end
        in_st = '{v: r2f(v), n: r2f(n), m: r2f(m), h: r2f(h)};
        i_ext = r2f(ie);
        ina = 120.0 * m * m * m * h * (v - 50.0);
        ik  = 36.0 * n * n * n * n * (v + 77.0);
        il  = 0.3 * (v + 54.387);
        e.v = v + dt * (ie - ina - ik - il);
        e.n = n + dt * (r[0] * (1.0 - n) - r[1] * n);
        e.m = m + dt * (r[2] * (1.0 - m) - r[3] * m);
        e.h = h + dt * (r[4] * (1.0 - h) - r[5] * h);
        q.push_back(e);
      end
      if (i >= 4) begin
        e = q.pop_front();
        checks += 4;
        if (!close(f2r(out_st.v), e.v, 1e-5, 2e-4) || !close(f2r(out_st.n), e.n, 1e-5, 1e-6) ||
            !close(f2r(out_st.m), e.m, 1e-5, 1e-6) || !close(f2r(out_st.h), e.h, 1e-5, 1e-6)) begin
          failures++;
          if (failures < 10) $display("FAIL %0d: V %f vs %f  n %f vs %f", i, f2r(out_st.v), e.v, f2r(out_st.n), e.n);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
