// dendrite_unit: the dendrite unit (DU) of one hardware neuron.
//
// Each clock it receives the P synaptic currents of one synapse slot together with
// the slot's tag (valid, postsynaptic neuron, last slot of that neuron). It adds the
// P currents to a running sum; on the neuron's last slot it writes the total into
// the Netsum memory at the neuron's index and restarts the sum. Netsum is one
// dual-port memory: written at the pace of the network timestep, read by the soma
// unit at the pace of the neuron timestep (registered read, latency 1). How the DU
// finds the neuron boundaries (the 'last' bit carried in the tag) is this
// implementation's choice. Initialising a neuron's state (CFG_NSTATE) clears its
// Netsum word.
module dendrite_unit
  import hh_pkg::*;
#(
  parameter int P        = 2,
  parameter int N_NEURON = 1500000
) (
  input  logic               clk,
  input  logic               rst_n,
  input  slot_tag_t          tag,
  input  logic signed [31:0] isyn [P],
  input  logic [LID_W-1:0]   netsum_raddr,
  output logic signed [31:0] netsum_rdata,
  input  cfg_wr_t            cfg,
  input  logic               cfg_sel
);
  logic signed [31:0] netsum [N_NEURON];
  logic signed [31:0] acc, slot_sum, total;

  always_comb begin
    slot_sum = '0;
    for (int p = 0; p < P; p++) slot_sum = slot_sum + isyn[p];
    total = acc + slot_sum;
  end

  always_ff @(posedge clk) begin
    if (!rst_n)                  acc <= '0;
    else if (tag.valid)          acc <= tag.last ? '0 : total;
  end

  always_ff @(posedge clk) begin
    if (tag.valid && tag.last)                               netsum[tag.post] <= total;
    else if (cfg_sel && cfg.we && cfg.tgt == CFG_NSTATE)     netsum[cfg.addr[LID_W-1:0]] <= '0;
  end

  always_ff @(posedge clk) netsum_rdata <= netsum[netsum_raddr];
endmodule
