// hh_network_top: the whole Hodgkin-Huxley network engine on one chip.
//
// N_HN hardware neurons (8 by default, 1.5 million neurons each: 12 million
// neurons, with 37.5 million synapse slots per NU/SNU pair, 600 million synapses)
// run in lock step under one control unit. Each HN writes the spikes of its neurons
// to its own port of the axon bus; every port reaches the MX memory of every NU of
// every HN, so after each network timestep every NU holds the spikes of all neurons
// and can serve any network topology without further communication.
//
// Interface:
//   start / n_steps   run n_steps network timesteps (1 ms of model time each)
//   busy / done / step   status; 'done' pulses once the pipelines have drained
//   cfg               initialisation writes into every memory of the system (the
//                     back end that loads topology, states and attributes), used
//                     while idle; see cfg_tgt_e in hh_pkg for the targets
//   axon_bus          the N_HN axon-bus write ports, exported for logging/display
// Timing: one network timestep takes 25 x N_NEURON clocks (125 s of run time per
// model second at 300 MHz with the default sizes).
module hh_network_top
  import hh_pkg::*;
#(
  parameter int N_HN      = 8,
  parameter int P         = 2,
  parameter int N_NEURON  = 1500000,
  parameter int N_SUBSTEP = 25
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] n_steps,
  input  cfg_wr_t     cfg,
  output logic        busy,
  output logic        done,
  output logic [31:0] step,
  output axon_wr_t    axon_bus [N_HN]
);
  sched_t sched;

  control_unit #(.N_NEURON(N_NEURON), .N_SUBSTEP(N_SUBSTEP)) u_cu (
    .clk, .rst_n, .start, .n_steps, .sched, .busy, .done, .step
  );

  for (genvar h = 0; h < N_HN; h++) begin : g_hn
    hardware_neuron #(.HN_ID(h), .N_HN(N_HN), .P(P), .N_NEURON(N_NEURON), .N_SUBSTEP(N_SUBSTEP)) u_hn (
      .clk, .rst_n, .sched, .axon_in(axon_bus), .axon_out(axon_bus[h]), .cfg
    );
  end

  // initialisation only while idle
  assert property (@(posedge clk) disable iff (!rst_n) cfg.we |-> !busy);
endmodule
