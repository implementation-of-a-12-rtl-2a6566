// su_acdn: per-neuron axonal conduction delay of the outgoing spike, 0..256
// network timesteps (ms), applied equally to all the neuron's output connections.
// How the delay is stored is this implementation's choice: a pending flag and a
// 9-bit countdown per neuron, so one spike can be in flight per neuron; a spike
// that arrives while another is in flight is dropped. Delay 0 sends the spike in the
// same network timestep. Combinational; the soma unit applies it once per neuron and
// network timestep, with the state in its ACDN memory:
//   st_old.pend = 0: spike & delay == 0 -> spike_out; spike -> pend, cnt = delay
//   st_old.pend = 1: cnt - 1 == 0 -> spike_out, pend cleared; else cnt - 1
module su_acdn (
  input  logic       spike,
  input  logic [8:0] delay,
  input  logic [9:0] st_old,      // {pend, cnt[8:0]}
  output logic [9:0] st_new,
  output logic       spike_out
);
  logic       pend;
  logic [8:0] cnt;
  assign {pend, cnt} = st_old;
  always_comb begin
    st_new    = st_old;
    spike_out = 1'b0;
    if (pend) begin
      if (cnt == 9'd1) begin
        spike_out = 1'b1;
        st_new    = 10'd0;
      end else begin
        st_new = {1'b1, cnt - 9'd1};
      end
    end else if (spike) begin
      if (delay == 9'd0) spike_out = 1'b1;
      else               st_new    = {1'b1, delay};
    end
  end
endmodule
