// nu_read: the network unit (NU) of one NU/SNU pair: MM -> R1 -> MX -> R2.
//
// Every synapse slot of the pair has an address t in MM, which holds the 24-bit id
// of the slot's presynaptic neuron. Counting t = 0, 1, 2, ... through a network
// timestep, the unit reads the id (R1) and looks up that neuron's spike of the last
// network timestep in MX (R2), so it delivers the presynaptic spike of one synapse
// per clock, two clocks after the slot address. Slots are filled neuron by neuron:
// the input synapses of a neuron are cut into pieces of P, piece k of every neuron
// going to slot (first slot of that neuron + k) of all P pairs, and unused places
// hold null synapses. The writing part of the NU is the MX memory itself, written
// from the axon bus. MM is written through the initialisation port (CFG_MM).
module nu_read
  import hh_pkg::*;
#(
  parameter int N_SLOT     = 37500000,
  parameter int N_HN       = 8,
  parameter int BANK_DEPTH = 1500000
) (
  input  logic              clk,
  input  logic [SLOT_W-1:0] slot,
  output logic              spike_out,     // R2: two clocks after slot
  input  axon_wr_t          axon [N_HN],
  input  cfg_wr_t           cfg,
  input  logic              cfg_sel        // cfg addresses this NU
);
  initial assert (N_SLOT <= 2**SLOT_W);

  logic [NID_W-1:0] mm [N_SLOT];
  logic [NID_W-1:0] r1;

  always_ff @(posedge clk) begin
    if (cfg_sel && cfg.we && cfg.tgt == CFG_MM) mm[cfg.addr] <= cfg.data[NID_W-1:0];
  end
  always_ff @(posedge clk) r1 <= mm[slot];

  mx_memory #(.N_HN(N_HN), .BANK_DEPTH(BANK_DEPTH)) u_mx (
    .clk, .raddr(r1), .rdata(spike_out), .axon, .cfg
  );
endmodule
