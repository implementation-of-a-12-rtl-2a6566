// synapse_unit: the synapse unit (SNU) of one NU/SNU pair, one synapse per clock.
//
// Each synapse slot has a 66-bit word: a 10-bit index into a table of 1024
// attribute sets of 180 bits (so rich per-synapse parameters cost 10 bits a
// synapse) and the 56-bit synaptic state. The pipeline, with the t-numbers of the
// synapse unit's block diagram (t0 = the ACDS input):
//   c-2 (in)  read the slot word           c-1  read the attribute set
//   t0        ACDS: per-synapse delay, 0..24 ms             -> t2
//   t2        STP (u, x, S) and LTP/STDP (x_j, w) in parallel -> t23
//   t23       new state written back; Membrane: I = S w g (E - V_post) -> t31
// Output isyn and the slot tag appear 33 clocks after the inputs. The inputs
// spike_in (from the NU), spike_post, stdp_post and v_post (from the soma unit, of
// the slot's postsynaptic neuron) and the tag must arrive in the same clock. A slot
// is revisited only every N_SLOT clocks, so N_SLOT must exceed the 25-clock
// read-to-write distance. Null synapses use an attribute set with g_syn = 0.
// The state and set layouts and the fixed-point formats are this implementation's.
module synapse_unit
  import hh_pkg::*;
#(
  parameter int N_SLOT = 37500000,
  parameter int N_ASET = 1024
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [SLOT_W-1:0]  slot,
  input  slot_tag_t          tag_in,
  input  logic               spike_in,
  input  logic               spike_post,
  input  logic [15:0]        stdp_post,
  input  logic signed [15:0] v_post,
  output slot_tag_t          tag_out,      // 33 clocks after the inputs
  output logic signed [31:0] isyn,
  input  cfg_wr_t            cfg,
  input  logic               cfg_sel
);
  localparam int LAT_ACDS = 2, LAT_PLAST = 21, LAT_MEMB = 8;
  localparam int LAT = 2 + LAT_ACDS + LAT_PLAST + LAT_MEMB;
  initial assert (N_SLOT > 2 + LAT_ACDS + LAT_PLAST && N_SLOT <= 2**SLOT_W);

  syn_word_t mem_syn  [N_SLOT];
  syn_attr_t mem_aset [N_ASET];

  // valid bits travel in their own reset shift register: vsh[i] is the valid bit of
  // the slot that entered i+1 clocks ago
  logic [LAT-1:0] vsh;
  always_ff @(posedge clk) begin
    if (!rst_n) vsh <= '0;
    else        vsh <= {vsh[LAT-2:0], tag_in.valid};
  end

  // read slot word, then attribute set
  syn_word_t word1, word0;
  syn_attr_t attr0;
  always_ff @(posedge clk) begin
    word1 <= mem_syn[slot];
    word0 <= word1;
    attr0 <= mem_aset[word1.aset];
  end

  // inputs aligned to t0
  typedef struct packed {
    slot_tag_t          tag;
    logic [SLOT_W-1:0]  slot;
    logic               spike_post;
    logic [15:0]        stdp_post;
    logic signed [15:0] v_post;
  } in_t;
  in_t in0, in2, in23;
  logic spk0;
  pipe_delay #(.W($bits(in_t) + 1), .N(2)) u_in (.clk,
    .d({tag_in, slot, spike_post, stdp_post, v_post, spike_in}), .q({in0, spk0}));

  // ACDS t0 -> t2
  logic       spk2;
  logic [5:0] acds2;
  snu_acds #(.LAT(LAT_ACDS)) u_acds (.clk, .spike_in(spk0), .delay(attr0.delay),
    .st({word0.st.acds_pend, word0.st.acds_cnt}), .spike_out(spk2), .st_new(acds2));

  syn_word_t word2;
  syn_attr_t attr2;
  pipe_delay #(.W($bits(in_t)), .N(LAT_ACDS)) u_in2 (.clk, .d(in0), .q(in2));
  pipe_delay #(.W($bits(syn_word_t)), .N(LAT_ACDS)) u_w2 (.clk, .d(word0), .q(word2));
  pipe_delay #(.W($bits(syn_attr_t)), .N(LAT_ACDS)) u_a2 (.clk, .d(attr0), .q(attr2));

  // STP and LTP t2 -> t23
  logic [9:0] u23, x23, s23, xj23, w23;
  snu_stp #(.LAT(LAT_PLAST)) u_stp (.clk, .spike(spk2), .u(word2.st.u), .x(word2.st.x), .s(word2.st.s),
    .u_inc(attr2.u_inc), .a_amp(attr2.a_amp), .dec_f(attr2.dec_f), .rec_d(attr2.rec_d), .dec_s(attr2.dec_s),
    .u_new(u23), .x_new(x23), .s_new(s23));
  snu_ltp #(.LAT(LAT_PLAST)) u_ltp (.clk, .spike(spk2), .spike_post(in2.spike_post), .stdp_post(in2.stdp_post),
    .xj(word2.st.xj), .w(word2.st.w), .a_plus(attr2.a_plus), .eta_plus(attr2.eta_plus),
    .eta_minus(attr2.eta_minus), .wmax(attr2.wmax), .dec_plus(attr2.dec_plus), .xj_new(xj23), .w_new(w23));

  logic [5:0]        acds23;
  logic [ASET_W-1:0] aset23;
  logic [15:0]       gsyn23;
  logic signed [15:0] esyn23;
  pipe_delay #(.W($bits(in_t)), .N(LAT_PLAST)) u_in23 (.clk, .d(in2), .q(in23));
  pipe_delay #(.W(6 + ASET_W + 32), .N(LAT_PLAST)) u_m23 (.clk,
    .d({acds2, word2.aset, attr2.gsyn, attr2.esyn}), .q({acds23, aset23, gsyn23, esyn23}));

  // write back at t23 (initialisation writes when the pipeline is idle)
  syn_word_t wb;
  assign wb = '{aset: aset23, st: '{acds_pend: acds23[5], acds_cnt: acds23[4:0],
                                     u: u23, x: x23, s: s23, xj: xj23, w: w23}};
  always_ff @(posedge clk) begin
    if (vsh[2 + LAT_ACDS + LAT_PLAST - 1]) mem_syn[in23.slot] <= wb;
    else if (cfg_sel && cfg.we && cfg.tgt == CFG_SYN)
      mem_syn[cfg.addr] <= syn_word_t'(cfg.data[$bits(syn_word_t)-1:0]);
  end
  always_ff @(posedge clk) begin
    if (cfg_sel && cfg.we && cfg.tgt == CFG_ASET)
      mem_aset[cfg.addr[$clog2(N_ASET)-1:0]] <= syn_attr_t'(cfg.data[$bits(syn_attr_t)-1:0]);
  end

  // Membrane t23 -> t31
  snu_membrane #(.LAT(LAT_MEMB)) u_memb (.clk, .s(s23), .w(w23), .gsyn(gsyn23), .esyn(esyn23),
    .v_post(in23.v_post), .isyn);
  slot_tag_t tag31;
  pipe_delay #(.W($bits(slot_tag_t)), .N(LAT_MEMB)) u_tag (.clk, .d(in23.tag), .q(tag31));
  assign tag_out = '{valid: vsh[LAT-1], last: tag31.last, post: tag31.post};

  // the tag must leave exactly LAT clocks after it entered
  if (LAT != 33) begin : g_lat_check
    $error("synapse_unit latency changed");
  end
endmodule
