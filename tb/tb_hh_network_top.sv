// tb_hh_network_top: end-to-end test of the whole chip. The top keeps its default
// N_HN = 8 hardware neurons, P = 2 NU/SNU pairs and N_SUBSTEP = 25 neuron timesteps
// per network timestep; only the neurons per HN are cut to 8 (200 synapse slots per
// pair) so the run takes seconds. Everything is loaded through the cfg port, then
// one start pulse runs 30 network timesteps (30 ms of model time).
//
// Network (all other slots are null synapses, all other neurons rest at -65 mV):
//   HN0 n0  starts at -50 mV and fires by itself
//   HN1 n0  synapse from HN0 n0;  axonal delay (ACDN) of 3 ms on its own output
//   HN2 n1  two slots: synapse from HN1 n0 with a 2 ms synaptic delay (ACDS), and
//           on pair 1 of the second slot a weak synapse from HN0 n0
//   HN7 n7  synapse from HN2 n1
// Netsum has a single buffer, so a strong current that arrives early in a network
// step already drives the soma's later substeps of that step: a neuron can fire in
// the same step as its input.
// Mechanisms counted (each must be seen at least once) and checked:
//   cross_hn  spikes carried from one HN to another over the axon bus
//   acdn      HN1 n0's spike reaches the bus exactly 3 steps after its soma spike
//   acds      HN2's delayed synapse jumps exactly 3 steps after the bus spike (1 step
//             to reach MX, plus the 2 ms delay)
//   stp       facilitation variable u rises on a presynaptic spike
//   stdp      the weight of HN1's synapse moves away from its initial value
//   multislot HN2 n1's Netsum picks up the second slot's weak current while the
//             delayed first slot is still silent, and HN2 n2's Netsum stays 0
//   null      neurons with only null synapses never fire
//   flush     every HN writes all its neurons to the bus once per network step
//   done      'done' pulses once, with step = n_steps
module tb_hh_network_top;
  import hh_pkg::*;
  import tb_util_pkg::*;
  localparam int NH = 8, NN = 8, NK = 25, NS = NN * NK, NSTEP = 30;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        rst_n, start, busy, done;
  logic [31:0] n_steps, step;
  cfg_wr_t     cfg;
  axon_wr_t    axon_bus [NH];

  hh_network_top #(.N_NEURON(NN)) dut (.clk, .rst_n, .start, .n_steps, .cfg, .busy, .done, .step, .axon_bus);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string s);
    failures++;
    if (failures < 20) $display("FAIL %s", s);
  endtask

  task automatic cfg_write(input cfg_tgt_e tgt, input int hn, input int unit, input int addr, input logic [255:0] data);
    @(negedge clk);
    cfg = '0;
    cfg.we = 1; cfg.tgt = tgt; cfg.hn = HN_W'(hn); cfg.unit = 2'(unit); cfg.addr = SLOT_W'(addr); cfg.data = data;
    @(negedge clk);
    cfg = '0;
  endtask

  // ---- bus monitor: step index of each write = writes so far / NN ----
  int nwr [NH];
  int bus_fire [NH][NN];          // first step in which the neuron's spike was on the bus
  int nspk_bus [NH];
  int n_cross, n_done;
  always @(posedge clk) if (rst_n) begin
    for (int h = 0; h < NH; h++) if (axon_bus[h].we) begin
      if (axon_bus[h].data) begin
        nspk_bus[h]++;
        if (h != 0) n_cross++;
        if (bus_fire[h][axon_bus[h].addr] < 0) bus_fire[h][axon_bus[h].addr] = nwr[h] / NN;
      end
      nwr[h]++;
    end
    if (done) n_done++;
  end

  // ---- soma spike of HN1 n0 (before its axonal delay) ----
  int soma1;
  always @(posedge clk)
    if (rst_n && soma1 < 0 && dut.g_hn[1].u_hn.u_su.run_we && dut.g_hn[1].u_hn.u_su.spk_all &&
        dut.g_hn[1].u_hn.u_su.side6.i == '0)
      soma1 = int'(step);

  initial begin
    syn_attr_t a0, a1, a2;
    syn_word_t w;
    neuron_set_t ns;
    neuron_attr_t na;
    int pre, aset, wt, last_step;
    int jump2, u_up, w1_moved, ms_seen, ms_bad, n_flush, n_null;
    rst_n = 0; start = 0; n_steps = NSTEP; cfg = '0;
    soma1 = -1; n_cross = 0; n_done = 0;
    for (int h = 0; h < NH; h++) begin
      nwr[h] = 0; nspk_bus[h] = 0;
      for (int i = 0; i < NN; i++) bus_fire[h][i] = -1;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    ns = '{gna: r2f(120.0), ena: r2f(50.0), gk: r2f(36.0), ek: r2f(-77.0), gl: r2f(0.3),
           el: r2f(-54.387), dt: r2f(0.04), dec_minus: 16'd58982, a_minus: 16'd19661};
    a0 = '0;
    a1 = '0;
    a1.u_inc = 10'd512; a1.a_amp = 10'd1023; a1.dec_f = 16'd58982; a1.rec_d = 16'd3277; a1.dec_s = 16'd52429;
    a1.a_plus = 10'd200; a1.dec_plus = 16'd58982; a1.eta_plus = 10'd200; a1.eta_minus = 10'd200;
    a1.wmax = 10'd1000; a1.gsyn = 16'd32768; a1.esyn = 16'sd0;
    a2 = a1; a2.delay = 5'd2;
    for (int h = 0; h < NH; h++) begin
      cfg_write(CFG_NSET, h, 0, 0, 256'(ns));
      for (int i = 0; i < NN; i++) begin
        neuron_state_t st;
        st = '{v: r2f(h == 0 && i == 0 ? -50.0 : -65.0), n: r2f(0.3177), m: r2f(0.0529), h: r2f(0.5961)};
        cfg_write(CFG_NSTATE, h, 0, i, 256'(st));
        na.nset = '0; na.delay = (h == 1 && i == 0) ? 9'd3 : 9'd0;
        cfg_write(CFG_NATTR, h, 0, i, 256'(na));
      end
      for (int p = 0; p < 2; p++) begin
        cfg_write(CFG_ASET, h, p, 0, 256'(a0));
        cfg_write(CFG_ASET, h, p, 1, 256'(a1));
        cfg_write(CFG_ASET, h, p, 2, 256'(a2));
      end
      // slots: 0 -> n0, 1..2 -> n1, 3..8 -> n2..n7, 9.. unused
      for (int s = 0; s < NS; s++) begin
        cfg_write(CFG_SEG, h, 0, s, 256'(s == 0 || (s >= 2 && s <= 8)));
        for (int p = 0; p < 2; p++) begin
          pre = 0; aset = 0; wt = 900;
          if (h == 1 && s == 0 && p == 0) begin pre = 0;              aset = 1; end
          if (h == 2 && s == 1 && p == 0) begin pre = 1 << LID_W;     aset = 2; end
          if (h == 2 && s == 2 && p == 1) begin pre = 0;              aset = 1; wt = 10; end
          if (h == 7 && s == 8 && p == 0) begin pre = (2 << LID_W) | 1; aset = 1; end
          cfg_write(CFG_MM, h, p, s, 256'(pre));
          w = '0;
          w.aset = ASET_W'(aset); w.st.x = 10'd1023; w.st.w = 10'(wt);
          cfg_write(CFG_SYN, h, p, s, 256'(w));
        end
      end
    end
    for (int b = 0; b < NH; b++) for (int i = 0; i < NN; i++)
      cfg_write(CFG_MX, 0, 0, (b << LID_W) | i, '0);

    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    jump2 = -1; u_up = 0; w1_moved = 0; ms_seen = 0; ms_bad = 0; n_flush = 0; last_step = 0;
    while (busy) begin
      @(negedge clk);
      if (int'(step) != last_step) begin
        // sampled at the boundary, 'step' network steps completed
        if (jump2 < 0 && dut.g_hn[2].u_hn.g_pair[0].u_snu.mem_syn[1].st.s != 0) jump2 = last_step;
        if (dut.g_hn[1].u_hn.g_pair[0].u_snu.mem_syn[0].st.u != 0) u_up = 1;
        if (dut.g_hn[1].u_hn.g_pair[0].u_snu.mem_syn[0].st.w != 10'd900) w1_moved = 1;
        if (dut.g_hn[2].u_hn.g_pair[0].u_snu.mem_syn[1].st.s == 0 && dut.g_hn[2].u_hn.u_du.netsum[1] > 0) ms_seen = 1;
        if (dut.g_hn[2].u_hn.u_du.netsum[2] != 0) ms_bad = 1;
        last_step = int'(step);
      end
    end
    repeat (10) @(negedge clk);
    for (int h = 0; h < NH; h++) if (nwr[h] == NSTEP * NN) n_flush++;

    n_null = 0;
    for (int h = 0; h < NH; h++) for (int i = 0; i < NN; i++)
      if (!((h == 0 && i == 0) || (h == 1 && i == 0) || (h == 2 && i == 1) || (h == 7 && i == 7)) && bus_fire[h][i] < 0)
        n_null++;
    $display("bus spikes: HN0 n0 @%0d, HN1 n0 soma @%0d bus @%0d, HN2 n1 @%0d (delayed S jump @%0d), HN7 n7 @%0d",
             bus_fire[0][0], soma1, bus_fire[1][0], bus_fire[2][1], jump2, bus_fire[7][7]);
    $display("mechanisms: cross_hn=%0d acdn=%0d acds=%0d stp=%0d stdp=%0d multislot=%0d null=%0d flush=%0d done=%0d",
             n_cross, int'(soma1 >= 0 && bus_fire[1][0] == soma1 + 3), int'(bus_fire[1][0] >= 0 && jump2 == bus_fire[1][0] + 3),
             u_up, w1_moved, int'(ms_seen && !ms_bad), n_null, n_flush, n_done);
    checks++; if (bus_fire[0][0] < 0) fail("HN0 n0 never fired");
    checks++; if (n_cross < 1) fail("no spike crossed between HNs");
    checks++; if (bus_fire[1][0] <= bus_fire[0][0]) fail("HN1 n0 not driven by HN0 n0");
    checks++; if (soma1 < 0 || bus_fire[1][0] != soma1 + 3) fail("ACDN delay of 3 steps not seen");
    checks++; if (bus_fire[1][0] < 0 || jump2 != bus_fire[1][0] + 3) fail("ACDS delay of 2 steps not seen");
    checks++; if (bus_fire[2][1] < jump2) fail("HN2 n1 fired before its delayed input");
    checks++; if (bus_fire[7][7] < bus_fire[2][1]) fail("HN7 n7 did not fire after HN2 n1");
    checks++; if (!u_up) fail("STP u never rose");
    checks++; if (!w1_moved) fail("STDP never moved the weight");
    checks++; if (!ms_seen || ms_bad) fail("multi-slot neuron's Netsum wrong");
    for (int h = 0; h < NH; h++) for (int i = 0; i < NN; i++) begin
      logic active;
      active = (h == 0 && i == 0) || (h == 1 && i == 0) || (h == 2 && i == 1) || (h == 7 && i == 7);
      checks++;
      if (!active && bus_fire[h][i] >= 0) fail($sformatf("silent neuron HN%0d n%0d fired", h, i));
    end
    checks++; if (n_flush != NH) fail($sformatf("only %0d HNs flushed every step", n_flush));
    checks++; if (n_done != 1 || step != NSTEP) fail("done/step wrong");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
