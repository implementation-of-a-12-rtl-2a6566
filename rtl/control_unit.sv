// control_unit: the system's control unit (CU), a set of counters that time every
// unit of every hardware neuron.
//
// A run of n_steps network timesteps starts on a one-clock 'start' pulse. Each
// network timestep lasts N_SUBSTEP x N_NEURON clocks (37.5 million by default): the
// slot address counts 0 .. N_SLOT-1 for the network and synapse units, while the
// soma unit's neuron index counts 0 .. N_NEURON-1 once per neuron timestep and the
// substep 0 .. N_SUBSTEP-1 once per network timestep, so both timesteps end on the
// same clock. There is no gap between timesteps. After the last step the CU waits
// DRAIN clocks for the pipelines to empty, pulses 'done' and returns to idle. The
// fixed offsets between units are applied by shift registers where the schedule is
// used. Start/stop and the step count are this implementation's choice.
module control_unit
  import hh_pkg::*;
#(
  parameter int N_NEURON  = 1500000,
  parameter int N_SUBSTEP = 25,
  parameter int DRAIN     = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] n_steps,
  output sched_t      sched,
  output logic        busy,
  output logic        done,
  output logic [31:0] step       // network timesteps completed in this run
);
  localparam int N_SLOT = N_NEURON * N_SUBSTEP;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e      state;
  logic [31:0] n_total;
  logic [15:0] drain_cnt;

  assign busy      = state != S_IDLE;
  assign sched.run = state == S_RUN;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      sched.slot    <= '0;
      sched.nidx    <= '0;
      sched.substep <= '0;
      step          <= '0;
      n_total       <= '0;
      drain_cnt     <= '0;
      done          <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start && n_steps != 0) begin
          state         <= S_RUN;
          n_total       <= n_steps;
          step          <= '0;
          sched.slot    <= '0;
          sched.nidx    <= '0;
          sched.substep <= '0;
        end
        S_RUN: begin
          if (32'(sched.nidx) == N_NEURON - 1) begin
            sched.nidx <= '0;
            if (32'(sched.substep) == N_SUBSTEP - 1) sched.substep <= '0;
            else                                      sched.substep <= sched.substep + 1'b1;
          end else begin
            sched.nidx <= sched.nidx + 1'b1;
          end
          if (32'(sched.slot) == N_SLOT - 1) begin
            sched.slot <= '0;
            step       <= step + 1;
            if (step + 1 == n_total) begin
              state     <= S_DRAIN;
              drain_cnt <= '0;
            end
          end else begin
            sched.slot <= sched.slot + 1'b1;
          end
        end
        S_DRAIN: begin
          drain_cnt <= drain_cnt + 1'b1;
          if (32'(drain_cnt) == DRAIN - 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the two timesteps stay aligned: slot = substep * N_NEURON + nidx
  assert property (@(posedge clk) disable iff (!rst_n)
    sched.run |-> 32'(sched.slot) == 32'(sched.substep) * N_NEURON + 32'(sched.nidx));
endmodule
