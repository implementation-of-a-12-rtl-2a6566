// hardware_neuron: one hardware neuron (HN), the computation node of the system.
//
// An HN computes N_NEURON neurons and all their input synapses in time division.
// It holds P network units (NU) and P synapse units (SNU), one dendrite unit (DU)
// and one soma unit (SU), each a pipeline taking one item per clock, wired in a
// ring: NU -> SNU -> DU -> SU -> axon bus -> NU (of every HN).
//
// Slot schedule (c = the clock the control unit issues slot t):
//   c    NU reads MM[t]; the slot's 'last slot of its neuron' bit is read
//   c+1  the postsynaptic neuron index is known (count of 'last' bits so far);
//        the SU's V_post / spike_post / stdp_post of that neuron are read
//   c+2  presynaptic spikes from the NUs' MX; all P SNUs start on slot t
//   c+35 the DU adds the P currents into the neuron's Netsum
// At the same time the SU runs its own schedule (neuron index, substep) from the
// control unit and writes this HN's spikes to its axon-bus port in the last substep
// of every network timestep. The 'last slot' memory (one bit per slot, CFG_SEG) and
// the post-neuron counter are this implementation's way of telling the SNU and DU
// which neuron a slot belongs to; every neuron needs at least one slot (slots of a
// neuron with no inputs, and unused slots, hold null synapses).
module hardware_neuron
  import hh_pkg::*;
#(
  parameter int HN_ID     = 0,
  parameter int N_HN      = 8,
  parameter int P         = 2,
  parameter int N_NEURON  = 1500000,
  parameter int N_SUBSTEP = 25
) (
  input  logic     clk,
  input  logic     rst_n,
  input  sched_t   sched,
  input  axon_wr_t axon_in [N_HN],
  output axon_wr_t axon_out,
  input  cfg_wr_t  cfg
);
  localparam int N_SLOT = N_NEURON * N_SUBSTEP;

  logic cfg_hn;
  assign cfg_hn = cfg.hn == HN_ID[HN_W-1:0];

  // ---- neuron boundaries and postsynaptic index ----
  logic              seg_last [N_SLOT];
  logic              run1, last1, first1;
  logic [LID_W-1:0]  post_cnt;
  slot_tag_t         tag1, tag2;
  logic [SLOT_W-1:0] slot2;

  always_ff @(posedge clk) begin
    if (cfg_hn && cfg.we && cfg.tgt == CFG_SEG) seg_last[cfg.addr] <= cfg.data[0];
  end
  always_ff @(posedge clk) begin
    if (!rst_n) run1 <= 1'b0;
    else        run1 <= sched.run;
    last1  <= seg_last[sched.slot];
    first1 <= sched.slot == '0;
  end
  assign tag1 = '{valid: run1, last: last1, post: first1 ? '0 : post_cnt};
  always_ff @(posedge clk) begin
    if (!rst_n)    post_cnt <= '0;
    else if (run1) post_cnt <= tag1.post + LID_W'(last1);
  end
  always_ff @(posedge clk) begin
    if (!rst_n) tag2 <= '0;
    else        tag2 <= tag1;
  end
  pipe_delay #(.W(SLOT_W), .N(2)) u_slot2 (.clk, .d(sched.slot), .q(slot2));

  // ---- soma unit ----
  logic [LID_W-1:0]   netsum_raddr;
  logic signed [31:0] netsum_rdata;
  logic signed [15:0] v_post;
  logic               spike_post;
  logic [15:0]        stdp_post;
  soma_unit #(.N_NEURON(N_NEURON), .N_SUBSTEP(N_SUBSTEP)) u_su (
    .clk, .rst_n, .sched, .netsum_raddr, .netsum_rdata, .axon_out,
    .post_raddr(tag1.post), .v_post, .spike_post, .stdp_post, .cfg, .cfg_sel(cfg_hn)
  );

  // ---- NU / SNU pairs ----
  slot_tag_t          snu_tag [P];
  logic signed [31:0] isyn    [P];
  for (genvar p = 0; p < P; p++) begin : g_pair
    logic spike_pre, sel;
    assign sel = cfg_hn && cfg.unit == 2'(p);
    nu_read #(.N_SLOT(N_SLOT), .N_HN(N_HN), .BANK_DEPTH(N_NEURON)) u_nu (
      .clk, .slot(sched.slot), .spike_out(spike_pre), .axon(axon_in), .cfg, .cfg_sel(sel)
    );
    synapse_unit #(.N_SLOT(N_SLOT)) u_snu (
      .clk, .rst_n, .slot(slot2), .tag_in(tag2), .spike_in(spike_pre), .spike_post, .stdp_post, .v_post,
      .tag_out(snu_tag[p]), .isyn(isyn[p]), .cfg, .cfg_sel(sel)
    );
  end

  // ---- dendrite unit ----
  dendrite_unit #(.P(P), .N_NEURON(N_NEURON)) u_du (
    .clk, .rst_n, .tag(snu_tag[0]), .isyn, .netsum_raddr, .netsum_rdata, .cfg, .cfg_sel(cfg_hn)
  );
endmodule
