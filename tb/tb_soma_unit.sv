// tb_soma_unit: runs the soma unit with 8 neurons and 5 substeps per network
// timestep for 60 network timesteps, with a fixed Netsum per neuron served by the
// testbench. A double-precision model (forward Euler, the same HH rate formulas
// sampled at the rate-table bins) predicts each neuron's potential, its flushed
// spike, its STDP trace and its axonal-delayed output. Checked after every network
// timestep: V_post, spike_post and stdp_post of every neuron; every axon-bus write
// (one per neuron, in the last substep only, with the delayed spike).
module tb_soma_unit;
  import hh_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 8, K = 5, STEPS = 60;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n;
  sched_t sched;
  logic [LID_W-1:0] netsum_raddr, post_raddr;
  logic signed [31:0] netsum_rdata;
  axon_wr_t axon_out;
  logic signed [15:0] v_post;
  logic spike_post;
  logic [15:0] stdp_post;
  cfg_wr_t cfg;

  soma_unit #(.N_NEURON(N), .N_SUBSTEP(K)) dut (.clk, .rst_n, .sched, .netsum_raddr, .netsum_rdata,
    .axon_out, .post_raddr, .v_post, .spike_post, .stdp_post, .cfg, .cfg_sel(1'b1));

  // Netsum served by the testbench, one clock after the address
  int netsum [N];
  always_ff @(posedge clk) netsum_rdata <= netsum[netsum_raddr[2:0]];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string s);
    failures++;
    if (failures < 15) $display("FAIL %s", s);
  endtask

  // model state
  real mv[N], mn[N], mm[N], mh[N];
  int  my[N], mdue[N], mdly[N];
  bit  mspk[N], mout[N];
  real dt = 0.04;
  int  axon_seen;
  int  axon_bad;
  int  fired_total, delayed_total;

  function automatic real rate_at(input int k, input real v);
    real vq;
    vq = (v < 0) ? -real'($rtoi(-v * 256.0)) / 256.0 : real'($rtoi(v * 256.0)) / 256.0;
    if (vq < -128.0) vq = -128.0;
    if (vq > 127.99) vq = 127.99;
    return f2r(r2f(hh_rate(k, bin_centre(vq))));
  endfunction

  task automatic model_substep(input int i, input bit last);
    real v, n, m, h, ie, ina, ik, il, vn;
    v = mv[i]; n = mn[i]; m = mm[i]; h = mh[i];
    ie = real'(netsum[i]) / 256.0;
    ina = 120.0 * m * m * m * h * (v - 50.0);
    ik  = 36.0 * n * n * n * n * (v + 77.0);
    il  = 0.3 * (v + 54.387);
    vn  = v + dt * (ie - ina - ik - il);
    mn[i] = n + dt * (rate_at(0, v) * (1.0 - n) - rate_at(1, v) * n);
    mm[i] = m + dt * (rate_at(2, v) * (1.0 - m) - rate_at(3, v) * m);
    mh[i] = h + dt * (rate_at(4, v) * (1.0 - h) - rate_at(5, v) * h);
    mv[i] = vn;
    if (v < 0 && vn >= 0) mspk[i] = 1;
  endtask

  task automatic model_flush(input int i, input int t);
    longint y;
    y = (longint'(my[i]) * 58982) / 65536 + (mspk[i] ? 19661 : 0);
    my[i] = (y > 65535) ? 65535 : int'(y);
    mout[i] = 0;
    if (mdue[i] == t) begin mout[i] = 1; mdue[i] = -1; end
    else if (mdue[i] < 0 && mspk[i]) begin
      if (mdly[i] == 0) mout[i] = 1; else mdue[i] = t + mdly[i];
    end
    if (mspk[i]) fired_total++;
    if (mout[i] && mdly[i] > 0) delayed_total++;
  endtask

  // axon-bus monitor
  always @(posedge clk) if (rst_n && axon_out.we) begin
    int a;
    a = int'(axon_out.addr);
    axon_seen++;
    checks++;
    if (a >= N || axon_out.data != mout[a]) begin
      axon_bad++;
      fail($sformatf("axon write neuron %0d data %0d expected %0d", a, axon_out.data, mout[a]));
    end
  end

  task automatic cfg_write(input cfg_tgt_e tgt, input int addr, input logic [255:0] data);
    @(negedge clk);
    cfg = '0;
    cfg.we = 1; cfg.tgt = tgt; cfg.addr = SLOT_W'(addr); cfg.data = data;
    @(negedge clk);
    cfg.we = 0;
  endtask

  initial begin
    neuron_set_t set0;
    neuron_attr_t na;
    real v0 [N] = '{-50.0, -65.0, -65.0, -50.0, -65.0, -65.0, -65.0, -65.0};
    real ie [N] = '{0.0, 0.0, 15.0, 0.0, -5.0, 10.0, 8.0, 30.0};
    int  dl [N] = '{0, 0, 0, 3, 0, 1, 2, 0};
    rst_n = 0; sched = '0; cfg = '0; post_raddr = '0; axon_seen = 0; axon_bad = 0;
    fired_total = 0; delayed_total = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    set0 = '{gna: r2f(120.0), ena: r2f(50.0), gk: r2f(36.0), ek: r2f(-77.0), gl: r2f(0.3),
             el: r2f(-54.387), dt: r2f(dt), dec_minus: 16'd58982, a_minus: 16'd19661};
    cfg_write(CFG_NSET, 0, 256'(set0));
    for (int i = 0; i < N; i++) begin
      real an, bn, am, bm, ah, bh;
      neuron_state_t s;
      an = hh_rate(0, -65.0); bn = hh_rate(1, -65.0); am = hh_rate(2, -65.0);
      bm = hh_rate(3, -65.0); ah = hh_rate(4, -65.0); bh = hh_rate(5, -65.0);
      s = '{v: r2f(v0[i]), n: r2f(an / (an + bn)), m: r2f(am / (am + bm)), h: r2f(ah / (ah + bh))};
      mv[i] = f2r(s.v); mn[i] = f2r(s.n); mm[i] = f2r(s.m); mh[i] = f2r(s.h);
      my[i] = 0; mdue[i] = -1; mdly[i] = dl[i]; mspk[i] = 0; mout[i] = 0;
      netsum[i] = $rtoi(ie[i] * 256.0);
      cfg_write(CFG_NSTATE, i, 256'(s));
      na.delay = 9'(dl[i]); na.nset = '0;
      cfg_write(CFG_NATTR, i, 256'(na));
    end
    for (int t = 0; t < STEPS; t++) begin
      int seen0;
      seen0 = axon_seen;
      for (int i = 0; i < N; i++) mspk[i] = 0;
      // the model runs ahead of the hardware: spikes are checked by the monitor
      for (int k = 0; k < K; k++)
        for (int i = 0; i < N; i++) begin
          model_substep(i, k == K - 1);
          if (k == K - 1) model_flush(i, t);
        end
      for (int k = 0; k < K; k++)
        for (int i = 0; i < N; i++) begin
          @(negedge clk);
          sched = '{run: 1'b1, slot: SLOT_W'(k * N + i), nidx: LID_W'(i), substep: STEP_W'(k)};
        end
      @(negedge clk) sched = '0;
      repeat (12) @(negedge clk);
      checks++;
      if (axon_seen - seen0 != N) fail($sformatf("step %0d: %0d axon writes", t, axon_seen - seen0));
      for (int i = 0; i < N; i++) begin
        post_raddr = LID_W'(i);
        @(posedge clk); #1;
        checks += 3;
        if (!close(real'(v_post) / 256.0, mv[i], 0, 0.05))
          fail($sformatf("step %0d neuron %0d V %f vs %f", t, i, real'(v_post) / 256.0, mv[i]));
        if (spike_post != mspk[i]) fail($sformatf("step %0d neuron %0d spike %0d vs %0d", t, i, spike_post, mspk[i]));
        if (int'(stdp_post) != my[i]) fail($sformatf("step %0d neuron %0d y %0d vs %0d", t, i, stdp_post, my[i]));
        @(negedge clk);
      end
    end
    // the run must have exercised firing and the axonal delay
    checks += 2;
    if (fired_total < 5) fail("too few spikes");
    if (delayed_total < 1) fail("no delayed spike");
    $display("spikes %0d, delayed outputs %0d", fired_total, delayed_total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
