// tb_synapse_unit: a synapse unit with 40 slots and 8 random attribute sets
// (delays 0..3, set 0 a null synapse with g_syn = 0), run for 12 network timesteps
// with random presynaptic spikes and random postsynaptic spike, trace and V_post.
// A model of each slot (axonal delay, STP, STDP, membrane in integer arithmetic)
// predicts every current; each must appear with its tag 33 clocks after the slot.
module tb_synapse_unit;
  import hh_pkg::*;
  localparam int NS = 40, NA = 8, STEPS = 12;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n;
  logic [SLOT_W-1:0] slot;
  slot_tag_t tag_in, tag_out;
  logic spike_in, spike_post;
  logic [15:0] stdp_post;
  logic signed [15:0] v_post;
  logic signed [31:0] isyn;
  cfg_wr_t cfg;
  synapse_unit #(.N_SLOT(NS)) dut (.clk, .rst_n, .slot, .tag_in, .spike_in, .spike_post, .stdp_post, .v_post,
    .tag_out, .isyn, .cfg, .cfg_sel(1'b1));

  syn_attr_t  attr [NA];
  syn_word_t  word [NS];
  int n_delayed = 0, n_nonzero = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat(input int v); return v > 1023 ? 1023 : v; endfunction

  // one network step of one synapse; returns the current, updates the word
  function automatic int step_model(inout syn_word_t wd, input bit spk_in, input bit sp_post,
                                    input int y, input int vpost);
    syn_attr_t a;
    bit sp;
    int um, up, xm, xp, sm, sp_s, ux, xjm, room, w1, w2, xjp, sw, g;
    longint p;
    a = attr[wd.aset];
    // ACDS
    sp = 0;
    if (wd.st.acds_pend) begin
      if (wd.st.acds_cnt == 1) begin sp = 1; wd.st.acds_pend = 0; wd.st.acds_cnt = 0; end
      else wd.st.acds_cnt = wd.st.acds_cnt - 1;
    end else if (spk_in) begin
      if (a.delay == 0) sp = 1; else begin wd.st.acds_pend = 1; wd.st.acds_cnt = a.delay; end
    end
    // STP
    um = (int'(wd.st.u) * int'(a.dec_f)) >> 16;
    up = sp ? sat(um + ((int'(a.u_inc) * (1024 - um)) >> 10)) : um;
    xm = sat(int'(wd.st.x) + (((1024 - int'(wd.st.x)) * int'(a.rec_d)) >> 16));
    ux = (up * xm) >> 10;
    xp = sp ? xm - ux : xm;
    sm = (int'(wd.st.s) * int'(a.dec_s)) >> 16;
    sp_s = sp ? sat(sm + ((int'(a.a_amp) * ux) >> 10)) : sm;
    // STDP
    xjm  = (int'(wd.st.xj) * int'(a.dec_plus)) >> 16;
    room = (a.wmax > wd.st.w) ? int'(a.wmax) - int'(wd.st.w) : 0;
    w1   = sp_post ? sat(int'(wd.st.w) + ((((room * int'(a.eta_plus)) >> 10) * xjm) >> 10)) : int'(wd.st.w);
    w2   = sp ? w1 - ((((w1 * int'(a.eta_minus)) >> 10) * (y >> 6)) >> 10) : w1;
    xjp  = sp ? sat(xjm + int'(a.a_plus)) : xjm;
    wd.st.u = 10'(up); wd.st.x = 10'(xp); wd.st.s = 10'(sp_s); wd.st.xj = 10'(xjp); wd.st.w = 10'(w2);
    // membrane
    sw = (sp_s * w2) >> 10;
    g  = (sw * int'(a.gsyn)) >> 10;
    p  = longint'(g) * longint'(int'(a.esyn) - vpost);
    if (sp && a.delay != 0) n_delayed++;
    return int'(p >>> 12);
  endfunction

  typedef struct { slot_tag_t tag; int i; } exp_t;
  exp_t q [$];
  int cyc = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
  end

  initial begin
    cfg = '0; slot = '0; tag_in = '0; spike_in = 0; spike_post = 0; stdp_post = 0; v_post = 0;
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < NA; a++) begin
      attr[a] = syn_attr_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
      attr[a].spare = '0;
      attr[a].delay = 5'(a % 4);
      attr[a].gsyn  = (a == 0) ? 16'd0 : attr[a].gsyn;
      attr[a].esyn  = (a % 2 == 1) ? 16'sd0 : -16'sd20480;    // 0 mV or -80 mV
      @(negedge clk);
      cfg.we = 1; cfg.tgt = CFG_ASET; cfg.addr = SLOT_W'(a); cfg.data = 256'(attr[a]);
    end
    for (int s = 0; s < NS; s++) begin
      word[s] = syn_word_t'({$urandom, $urandom, $urandom});
      word[s].aset = ASET_W'(s % NA);
      word[s].st.acds_pend = 0; word[s].st.acds_cnt = 0;
      @(negedge clk);
      cfg.we = 1; cfg.tgt = CFG_SYN; cfg.addr = SLOT_W'(s); cfg.data = 256'(word[s]);
    end
    @(negedge clk) cfg = '0;
    for (int t = 0; t < STEPS; t++) begin
      for (int s = 0; s < NS + 40; s++) begin
        @(negedge clk);
        if (s < NS) begin
          exp_t e;
          slot = SLOT_W'(s);
          tag_in = '{valid: 1'b1, last: 1'($urandom), post: LID_W'($urandom)};
          spike_in = 1'($urandom_range(2, 0) == 0);
          spike_post = 1'($urandom_range(3, 0) == 0);
          stdp_post = 16'($urandom);
          v_post = 16'sd256 * 16'($signed(8'($urandom)) / 2) - 16'sd16640;   // about -65 mV +- 64 mV
          e.tag = tag_in;
          e.i = step_model(word[s], spike_in, spike_post, int'(stdp_post), int'(v_post));
          q.push_back(e);
        end else begin
          tag_in = '0; spike_in = 0;
        end
        // results leave 33 clocks after their slot
        if (s >= 33 && s < NS + 33) begin
          exp_t e;
          e = q.pop_front();
          checks++;
          if (tag_out != e.tag || isyn != e.i) begin
            failures++;
            if (failures < 10) $display("FAIL step %0d slot %0d: isyn %0d expected %0d tag %h/%h", t, s - 33, isyn, e.i, tag_out, e.tag);
          end
          if (e.i != 0) n_nonzero++;
        end else if (s >= NS + 33) begin
          checks++;
          if (tag_out.valid) begin failures++; $display("FAIL stray valid tag"); end
        end
      end
    end
    checks += 2;
    if (n_delayed == 0) begin failures++; $display("FAIL no delayed spike arrived"); end
    if (n_nonzero == 0) begin failures++; $display("FAIL no current"); end
    $display("delayed arrivals %0d, nonzero currents %0d", n_delayed, n_nonzero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
