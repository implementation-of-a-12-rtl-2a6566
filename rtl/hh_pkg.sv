// hh_pkg: system-wide constants, data formats and bus types of the multi-node
// Hodgkin-Huxley network engine.
//
// System geometry (defaults of the high-capacity configuration): 8 hardware
// neurons (HNs), each with P = 2 network-unit / synapse-unit pairs and 1.5 million
// neurons; a neuron is named by a 24-bit id {HN index (3 bits), local index (21 bits)}.
//
// Number formats. The soma unit works in IEEE single precision (hh_fp_pkg). The
// synapse and dendrite units work in fixed point, a choice of this implementation:
//   synaptic state u, x, S, x_j, w   Q0.10 unsigned (fractions of 1.0)
//   per-step factors (1 - 1/tau) etc  Q0.16 unsigned
//   potentials V_post, E_syn          Q7.8 signed, mV
//   conductance g_syn                 Q4.12 unsigned
//   currents I_syn, Netsum            Q23.8 signed
// The 56-bit synaptic state and the 180-bit synaptic attribute set have the sizes
// the design specifies; their field layout is this implementation's.
package hh_pkg;

  import hh_fp_pkg::*;

  localparam int NID_W  = 24;     // neuron id in the whole system
  localparam int LID_W  = 21;     // neuron index inside one HN (2^21 MX bank)
  localparam int HN_W   = 3;      // HN index, up to 8 HNs
  localparam int SLOT_W = 26;     // synapse-slot address inside one NU
  localparam int STEP_W = 5;      // neuron substep counter (25 per network step)
  localparam int CFG_DW = 256;    // initialisation write data
  localparam int ASET_W = 10;     // synaptic attribute-set index (1024 sets)
  localparam int NSET_W = 4;      // neuronal attribute-set index (16 sets)

  // ---- synapse unit -------------------------------------------------------------
  typedef struct packed {
    logic       acds_pend;        // a spike is travelling along the synaptic delay
    logic [4:0] acds_cnt;         // network steps left until it arrives
    logic [9:0] u;                // STP utilisation
    logic [9:0] x;                // STP available resources
    logic [9:0] s;                // STP synaptic conductance variable S
    logic [9:0] xj;               // STDP presynaptic trace
    logic [9:0] w;                // STDP weight
  } syn_state_t;                  // 56 bits

  typedef struct packed {
    logic [18:0] spare;
    logic [4:0]  delay;           // ACDS delay, 0..24 network steps (ms)
    logic [9:0]  u_inc;           // U of Eq. 1, Q0.10
    logic [9:0]  a_amp;           // A of Eq. 1, Q0.10
    logic [15:0] dec_f;           // 1 - 1/tau_f, Q0.16
    logic [15:0] rec_d;           // 1/tau_d, Q0.16
    logic [15:0] dec_s;           // 1 - 1/tau_s, Q0.16
    logic [9:0]  a_plus;          // STDP trace increment a_+, Q0.10
    logic [15:0] dec_plus;        // 1 - 1/tau_+, Q0.16
    logic [9:0]  eta_plus;        // Q0.10
    logic [9:0]  eta_minus;       // Q0.10
    logic [9:0]  wmax;            // Q0.10
    logic [15:0] gsyn;            // Q4.12
    logic signed [15:0] esyn;     // Q7.8 mV
  } syn_attr_t;                   // 180 bits

  typedef struct packed {
    logic [ASET_W-1:0] aset;      // attribute-set index
    syn_state_t        st;
  } syn_word_t;                   // 66 bits per synapse slot

  // ---- soma unit ---------------------------------------------------------------
  typedef struct packed {
    f32_t v, n, m, h;
  } neuron_state_t;

  typedef struct packed {
    logic [8:0]        delay;     // ACDN delay, 0..256 network steps (ms)
    logic [NSET_W-1:0] nset;      // neuronal attribute-set index
  } neuron_attr_t;

  typedef struct packed {
    f32_t        gna, ena, gk, ek, gl, el;
    f32_t        dt;              // neuron timestep divided by C_m (0.04 ms / C_m)
    logic [15:0] dec_minus;       // STDP postsynaptic decay 1 - 1/tau_-, Q0.16
    logic [15:0] a_minus;         // STDP postsynaptic increment a_-, Q0.16
  } neuron_set_t;                 // 256 bits

  // ---- axon bus: one write port per HN into every MX memory ---------------------
  typedef struct packed {
    logic             we;
    logic [LID_W-1:0] addr;
    logic             data;
  } axon_wr_t;

  // ---- control unit schedule ----------------------------------------------------
  typedef struct packed {
    logic              run;       // a slot / neuron is issued this clock
    logic [SLOT_W-1:0] slot;      // synapse slot of the network timestep
    logic [LID_W-1:0]  nidx;      // neuron processed by the soma unit
    logic [STEP_W-1:0] substep;   // neuron timestep inside the network timestep
  } sched_t;

  // Slot sideband travelling with a synapse through SNU and DU.
  typedef struct packed {
    logic             valid;
    logic             last;       // last slot of its postsynaptic neuron
    logic [LID_W-1:0] post;       // postsynaptic neuron (local index)
  } slot_tag_t;

  // ---- back-end initialisation writes ------------------------------------------
  typedef enum logic [3:0] {
    CFG_MM     = 4'd0,            // NU topology: addr = slot, data = presynaptic id
    CFG_SEG    = 4'd1,            // CU: addr = slot, data[0] = last slot of a neuron
    CFG_SYN    = 4'd2,            // SNU slot word (syn_word_t)
    CFG_ASET   = 4'd3,            // SNU attribute set (syn_attr_t)
    CFG_NSTATE = 4'd4,            // SU neuron state (neuron_state_t)
    CFG_NATTR  = 4'd5,            // SU per-neuron attributes (neuron_attr_t)
    CFG_NSET   = 4'd6,            // SU attribute set (neuron_set_t)
    CFG_MX     = 4'd7             // MX spike word: addr = neuron id, data[0] = spike
  } cfg_tgt_e;

  typedef struct packed {
    logic              we;
    cfg_tgt_e          tgt;
    logic [HN_W-1:0]   hn;        // HN addressed (ignored by CFG_MX: all copies)
    logic [1:0]        unit;      // NU / SNU pair addressed
    logic [SLOT_W-1:0] addr;
    logic [CFG_DW-1:0] data;
  } cfg_wr_t;

  // Q0.10 x Q0.16 -> Q0.10 (truncating)
  function automatic logic [9:0] mul10x16(input logic [9:0] a, input logic [15:0] f);
    logic [25:0] p;
    p = {16'd0, a} * {10'd0, f};
    return p[25:16];
  endfunction

  // Q0.10 x Q0.10 -> Q0.10 (truncating)
  function automatic logic [9:0] mul10x10(input logic [9:0] a, input logic [9:0] b);
    logic [19:0] p;
    p = {10'd0, a} * {10'd0, b};
    return p[19:10];
  endfunction

  // Saturating Q0.10 add
  function automatic logic [9:0] sat_add10(input logic [9:0] a, input logic [9:0] b);
    logic [10:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[10] ? 10'h3ff : s[9:0];
  endfunction

endpackage
