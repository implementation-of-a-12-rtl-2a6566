// tb_hardware_neuron: one hardware neuron (8 neurons, P = 2, 5 substeps, so 40
// synapse slots) with its own axon-bus port looped back and the port of a second,
// absent HN driven by the testbench. Network:
//   neuron 0  starts depolarised (-50 mV): fires on its own
//   neuron 1  two slots: synapse from neuron 0 (no delay) and from neuron 0 (delay 2)
//   neuron 2  synapse from neuron 0 of the other HN, which the testbench fires once
//   neurons 3..7  one null synapse each: must stay silent
// Checked: one axon write per neuron per network timestep, in the last substep;
// neuron 0 fires, neuron 1 fires after it, neuron 2 only after the external spike,
// neuron 3 never; Netsum of neuron 1 turns positive after neuron 0's spike; the
// delayed synapse's spike arrives two steps after the undelayed one; the weight of
// the first synapse changes (STDP).
module tb_hardware_neuron;
  import hh_pkg::*;
  import tb_util_pkg::*;
  localparam int NH = 2, NN = 8, NK = 5, NS = NN * NK, STEPS = 40;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n;
  sched_t sched;
  axon_wr_t axon_in [NH];
  axon_wr_t axon_out;
  cfg_wr_t cfg;
  axon_wr_t ext;

  hardware_neuron #(.HN_ID(0), .N_HN(NH), .P(2), .N_NEURON(NN), .N_SUBSTEP(NK)) dut (
    .clk, .rst_n, .sched, .axon_in, .axon_out, .cfg);
  assign axon_in[0] = axon_out;
  assign axon_in[1] = ext;

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

  task automatic cfg_write(input cfg_tgt_e tgt, input int unit, input int addr, input logic [255:0] data);
    @(negedge clk);
    cfg = '0;
    cfg.we = 1; cfg.tgt = tgt; cfg.hn = '0; cfg.unit = 2'(unit); cfg.addr = SLOT_W'(addr); cfg.data = data;
    @(negedge clk);
    cfg = '0;
  endtask

  int first_fire [NN];
  int writes_this_step;
  int cur_step;
  always @(posedge clk) if (rst_n && axon_out.we) begin
    writes_this_step++;
    if (axon_out.data && first_fire[axon_out.addr] < 0) first_fire[axon_out.addr] = cur_step;
  end

  initial begin
    syn_attr_t a;
    syn_word_t w;
    neuron_set_t ns;
    neuron_attr_t na;
    int ext_step, netsum_pos_step, w_changed;
    int arr_fast, arr_slow;
    rst_n = 0; sched = '0; cfg = '0; ext = '0; cur_step = -1;
    for (int i = 0; i < NN; i++) first_fire[i] = -1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // neuron attribute set and neurons
    ns = '{gna: r2f(120.0), ena: r2f(50.0), gk: r2f(36.0), ek: r2f(-77.0), gl: r2f(0.3),
           el: r2f(-54.387), dt: r2f(0.04), dec_minus: 16'd58982, a_minus: 16'd19661};
    cfg_write(CFG_NSET, 0, 0, 256'(ns));
    for (int i = 0; i < NN; i++) begin
      neuron_state_t st;
      st = '{v: r2f(i == 0 ? -50.0 : -65.0), n: r2f(0.3177), m: r2f(0.0529), h: r2f(0.5961)};
      cfg_write(CFG_NSTATE, 0, i, 256'(st));
      na.delay = '0; na.nset = '0;
      cfg_write(CFG_NATTR, 0, i, 256'(na));
    end
    // synaptic attribute sets: 0 null, 1 excitatory, 2 excitatory with 2 ms delay
    for (int p = 0; p < 2; p++) begin
      cfg_write(CFG_ASET, p, 0, '0);
      a = '0;
      a.u_inc = 10'd512; a.a_amp = 10'd1023; a.dec_f = 16'd58982; a.rec_d = 16'd3277; a.dec_s = 16'd52429;
      a.a_plus = 10'd200; a.dec_plus = 16'd58982; a.eta_plus = 10'd200; a.eta_minus = 10'd200; a.wmax = 10'd1000;
      a.gsyn = 16'd32768; a.esyn = 16'sd0;
      cfg_write(CFG_ASET, p, 1, 256'(a));
      a.delay = 5'd2;
      cfg_write(CFG_ASET, p, 2, 256'(a));
    end
    // slots: 0 -> neuron 0, 1..2 -> neuron 1, 3..8 -> neurons 2..7, rest unused
    for (int s = 0; s < NS; s++) begin
      cfg_write(CFG_SEG, 0, s, 256'(s == 0 || (s >= 2 && s <= 8)));
      for (int p = 0; p < 2; p++) begin
        int pre, aset;
        pre = 0; aset = 0;
        if (p == 0 && s == 1) begin pre = 0; aset = 1; end                 // n0 -> n1
        if (p == 0 && s == 2) begin pre = 0; aset = 2; end                 // n0 -> n1, delay 2
        if (p == 0 && s == 3) begin pre = (1 << LID_W); aset = 1; end      // HN1 n0 -> n2
        cfg_write(CFG_MM, p, s, 256'(pre));
        w = '0;
        w.aset = ASET_W'(aset); w.st.x = 10'd1023; w.st.w = 10'd900;
        cfg_write(CFG_SYN, p, s, 256'(w));
      end
    end
    for (int b = 0; b < NH; b++) for (int i = 0; i < NN; i++) begin
      @(negedge clk);
      cfg = '0; cfg.we = 1; cfg.tgt = CFG_MX; cfg.addr = SLOT_W'((b << LID_W) | i);
    end
    @(negedge clk) cfg = '0;

    ext_step = 25; netsum_pos_step = -1; w_changed = 0; arr_fast = -1; arr_slow = -1;
    for (int t = 0; t < STEPS; t++) begin
      cur_step = t;
      writes_this_step = 0;
      for (int s = 0; s < NS; s++) begin
        @(negedge clk);
        sched = '{run: 1'b1, slot: SLOT_W'(s), nidx: LID_W'(s % NN), substep: STEP_W'(s / NN)};
        // the absent HN 1 fires its neuron 0 once, in its flush window
        ext = '0;
        if (t == ext_step && s == NS - 1) ext = '{we: 1'b1, addr: '0, data: 1'b1};
        if (t == ext_step + 1 && s == NS - 1) ext = '{we: 1'b1, addr: '0, data: 1'b0};
      end
      @(negedge clk) sched = '0; ext = '0;
      repeat (40) @(negedge clk);
      checks++;
      if (writes_this_step != NN) fail($sformatf("step %0d: %0d axon writes", t, writes_this_step));
      if (netsum_pos_step < 0 && dut.u_du.netsum[1] > 0) netsum_pos_step = t;
      if (dut.g_pair[0].u_snu.mem_syn[1].st.w != 10'd900) w_changed = 1;
      if (arr_fast < 0 && dut.g_pair[0].u_snu.mem_syn[1].st.s != 0) arr_fast = t;
      if (arr_slow < 0 && dut.g_pair[0].u_snu.mem_syn[2].st.s != 0) arr_slow = t;
    end
    $display("first spikes: %0d %0d %0d; netsum>0 at %0d; S jumps at %0d and %0d",
             first_fire[0], first_fire[1], first_fire[2], netsum_pos_step, arr_fast, arr_slow);
    checks += 6;
    if (first_fire[0] < 0) fail("neuron 0 never fired");
    if (first_fire[1] <= first_fire[0]) fail("neuron 1 did not fire after neuron 0");
    if (first_fire[2] <= ext_step) fail("neuron 2 did not fire after the external spike");
    for (int i = 3; i < NN; i++) begin
      checks++;
      if (first_fire[i] >= 0) fail($sformatf("neuron %0d fired", i));
    end
    if (netsum_pos_step != first_fire[0] + 1) fail("Netsum of neuron 1 did not rise in the step after the spike");
    if (arr_fast < 0 || arr_slow != arr_fast + 2) fail("delayed synapse not 2 steps behind");
    if (!w_changed) fail("weight never changed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
