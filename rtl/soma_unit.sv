// soma_unit: the soma unit (SU) of one hardware neuron.
//
// It computes one Hodgkin-Huxley neuron per clock in single precision. With
// N_NEURON neurons per hardware neuron, one neuron timestep (40 us) takes N_NEURON
// clocks and one network timestep (1 ms) N_SUBSTEP = 25 neuron timesteps, exactly
// as long as the network and synapse units take for their N_SUBSTEP x N_NEURON
// synapse slots. The control unit supplies the neuron index and substep.
//
// Per neuron and clock (c = the clock the schedule arrives):
//   c    read state {V,n,m,h}, attribute word, Spike 1, STDP 1, ACDN state, Netsum
//   c+1  Netsum -> float (I2F); V -> Q7.8 -> gate-rate tables; attribute-set read
//   c+2  hh_core (4 stages)
//   c+6  write the new state; spike detector (V crosses 0 from below); V -> F2I
//   c+7  F2I result written to Vi (the potential the synapse units read)
//        substeps 0..23: Spike 1 |= spike
//        substep 24 (flush): the gathered spike updates the STDP trace (STDP 1 and its
//        copy STDP 2), is stored in Spike 2, and passes through the per-neuron axonal
//        delay (ACDN); the delayed spike is written to the axon bus (registered, c+7)
// The synapse units read V_post (Vi), spike_post (Spike 2) and stdp_post (STDP 2)
// of any neuron through the post_raddr port, one clock later.
//
// The block structure (state memories, gate functions, HH, spike detector, Spike 1/2,
// STDP 1/2, ACDN with its delay memory, F2I/Vi, I2F) follows the design; the
// pipeline depth, the per-neuron attribute word with a 16-entry attribute-set table,
// and the single (not double) buffering of Spike 2, STDP 2 and Vi are choices made
// here. Writing a neuron's state through the initialisation port also clears its
// Spike 1/2, STDP 1/2 and ACDN entries and sets its Vi. A neuron is revisited only
// every N_NEURON clocks, so N_NEURON must exceed the 6-clock read-to-write distance.
module soma_unit
  import hh_fp_pkg::*;
  import hh_pkg::*;
#(
  parameter int N_NEURON  = 1500000,
  parameter int N_SUBSTEP = 25,
  parameter int N_NSET    = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  sched_t             sched,
  output logic [LID_W-1:0]   netsum_raddr,
  input  logic signed [31:0] netsum_rdata,     // one clock after netsum_raddr
  output axon_wr_t           axon_out,
  input  logic [LID_W-1:0]   post_raddr,
  output logic signed [15:0] v_post,           // one clock after post_raddr
  output logic               spike_post,
  output logic [15:0]        stdp_post,
  input  cfg_wr_t            cfg,
  input  logic               cfg_sel           // cfg addresses this HN
);
  initial assert (N_NEURON > 6 && N_NEURON <= 2**LID_W);

  // ---------------- memories ----------------
  neuron_state_t mem_st    [N_NEURON];
  neuron_attr_t  mem_attr  [N_NEURON];
  neuron_set_t   mem_set   [N_NSET];
  logic          mem_spk1  [N_NEURON];
  logic [15:0]   mem_stdp1 [N_NEURON];
  logic [9:0]    mem_acdn  [N_NEURON];
  logic          mem_spk2  [N_NEURON];
  logic [15:0]   mem_stdp2 [N_NEURON];
  logic signed [15:0] mem_vi [N_NEURON];

  assign netsum_raddr = sched.nidx;

  // ---------------- c+1: memory read ----------------
  logic               v1;
  logic [LID_W-1:0]   i1;
  logic [STEP_W-1:0]  k1;
  neuron_state_t      st1;
  neuron_attr_t       at1;
  logic               spk1_1;
  logic [15:0]        y1;
  logic [9:0]         ac1;
  always_ff @(posedge clk) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= sched.run;
    i1     <= sched.nidx;
    k1     <= sched.substep;
    st1    <= mem_st[sched.nidx];
    at1    <= mem_attr[sched.nidx];
    spk1_1 <= mem_spk1[sched.nidx];
    y1     <= mem_stdp1[sched.nidx];
    ac1    <= mem_acdn[sched.nidx];
  end

  // ---------------- c+2: conversions, rate tables, attribute set ----------------
  f32_t        iext2;
  f32_t        rates2 [6];
  neuron_set_t set2;
  logic signed [15:0] vq1;
  assign vq1 = f2fix16(st1.v, 8);

  i2f #(.FRAC_BITS(8)) u_i2f (.clk, .i_fix(netsum_rdata), .o_fp(iext2));
  hh_gate_lut u_lut (.clk, .v_fix(vq1), .rates(rates2));
  always_ff @(posedge clk) set2 <= mem_set[at1.nset];

  // sideband of stage 1 delayed to c+2
  typedef struct packed {
    logic              v;
    logic [LID_W-1:0]  i;
    logic [STEP_W-1:0] k;
    logic              spk1;
    logic [15:0]       y;
    logic [9:0]        ac;
    logic [8:0]        dly;
    f32_t              vold;
  } side_t;
  side_t side1, side2, side6;
  neuron_state_t st2;
  assign side1 = '{v: v1, i: i1, k: k1, spk1: spk1_1, y: y1, ac: ac1, dly: at1.delay, vold: st1.v};
  always_ff @(posedge clk) begin
    if (!rst_n) side2.v <= 1'b0;
    else        side2.v <= side1.v;
    {side2.i, side2.k, side2.spk1, side2.y, side2.ac, side2.dly, side2.vold} <=
      {side1.i, side1.k, side1.spk1, side1.y, side1.ac, side1.dly, side1.vold};
    st2 <= st1;
  end

  // ---------------- c+2 .. c+6: HH pipeline ----------------
  neuron_state_t st6;
  logic [15:0]   dec6, amin6;
  hh_core u_hh (.clk, .in_st(st2), .rates(rates2), .i_ext(iext2), .attr(set2), .out_st(st6));
  pipe_delay #(.W($bits(side_t)), .N(4)) u_side (.clk, .d(side2), .q(side6));
  // the valid bit has its own reset shift register
  logic [3:0] vsh;
  always_ff @(posedge clk) begin
    if (!rst_n) vsh <= '0;
    else        vsh <= {vsh[2:0], side2.v};
  end
  pipe_delay #(.W(32), .N(4)) u_stdp_attr (.clk, .d({set2.dec_minus, set2.a_minus}), .q({dec6, amin6}));

  // ---------------- c+6: spike detector, flush, STDP, ACDN ----------------
  logic        spk_det, spk_all, flush, acdn_spk;
  logic [15:0] y_new;
  logic [9:0]  ac_new;
  assign spk_det = side6.vold[31] && !st6.v[31];      // crosses zero from a negative value
  assign spk_all = side6.spk1 | spk_det;
  assign flush   = vsh[3] && (side6.k == STEP_W'(N_SUBSTEP - 1));

  su_stdp_post u_stdp (.y_old(side6.y), .spike(spk_all), .dec_minus(dec6), .a_minus(amin6), .y_new);
  su_acdn      u_acdn (.spike(spk_all), .delay(side6.dly), .st_old(side6.ac), .st_new(ac_new), .spike_out(acdn_spk));

  // initialisation writes
  logic cfg_st, cfg_at, cfg_set;
  logic [LID_W-1:0] cfg_a;
  assign cfg_st  = cfg_sel && cfg.we && cfg.tgt == CFG_NSTATE;
  assign cfg_at  = cfg_sel && cfg.we && cfg.tgt == CFG_NATTR;
  assign cfg_set = cfg_sel && cfg.we && cfg.tgt == CFG_NSET;
  assign cfg_a   = cfg.addr[LID_W-1:0];

  // one write port per memory: pipeline write, else initialisation write
  logic [LID_W-1:0] wa;
  logic             run_we;
  assign run_we = vsh[3];
  assign wa     = run_we ? side6.i : cfg_a;

  always_ff @(posedge clk) begin
    if (run_we)      mem_st[wa] <= st6;
    else if (cfg_st) mem_st[wa] <= neuron_state_t'(cfg.data[$bits(neuron_state_t)-1:0]);
  end
  always_ff @(posedge clk) if (cfg_at)  mem_attr[cfg_a] <= neuron_attr_t'(cfg.data[$bits(neuron_attr_t)-1:0]);
  always_ff @(posedge clk) if (cfg_set) mem_set[cfg.addr[$clog2(N_NSET)-1:0]] <= neuron_set_t'(cfg.data);
  always_ff @(posedge clk) begin
    if (run_we)      mem_spk1[wa] <= flush ? 1'b0 : spk_all;
    else if (cfg_st) mem_spk1[wa] <= 1'b0;
  end
  always_ff @(posedge clk) begin
    if (run_we && flush) begin
      mem_stdp1[wa] <= y_new;
      mem_stdp2[wa] <= y_new;
      mem_acdn[wa]  <= ac_new;
      mem_spk2[wa]  <= spk_all;
    end else if (!run_we && cfg_st) begin
      mem_stdp1[wa] <= 16'd0;
      mem_stdp2[wa] <= 16'd0;
      mem_acdn[wa]  <= 10'd0;
      mem_spk2[wa]  <= 1'b0;
    end
  end
  // Vi: the new V through F2I (one clock), written at c+7
  logic signed [15:0] vi7;
  logic [LID_W-1:0]   wa7;
  logic               we7;
  f2i #(.FRAC_BITS(8)) u_f2i (.clk, .i_fp(st6.v), .o_fix(vi7));
  always_ff @(posedge clk) begin
    if (!rst_n) we7 <= 1'b0;
    else        we7 <= run_we;
    wa7 <= side6.i;
  end
  always_ff @(posedge clk) begin
    if (we7)         mem_vi[wa7]   <= vi7;
    else if (cfg_st) mem_vi[cfg_a] <= f2fix16(cfg.data[127:96], 8);
  end

  // axon bus write port: the delayed spike of every neuron, once per network step
  always_ff @(posedge clk) begin
    if (!rst_n) axon_out <= '0;
    else begin
      axon_out.we   <= run_we && flush;
      axon_out.addr <= side6.i;
      axon_out.data <= acdn_spk;
    end
  end

  // read port for the synapse units
  always_ff @(posedge clk) begin
    v_post     <= mem_vi[post_raddr];
    spike_post <= mem_spk2[post_raddr];
    stdp_post  <= mem_stdp2[post_raddr];
  end
endmodule
