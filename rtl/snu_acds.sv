// snu_acds: axonal conduction delay per synapse (ACDS), 0..24 network timesteps.
// State per synapse: a pending flag and a 5-bit countdown (one spike in flight; a
// spike arriving while one is pending is dropped; delay 0 passes the spike straight
// through). The design gives only the 0-24 ms range; the counter is this
// implementation's choice. Inputs at t0, outputs LAT = 2 clocks later (t2), the
// latency printed in the synapse unit's block diagram.
module snu_acds #(
  parameter int LAT = 2
) (
  input  logic       clk,
  input  logic       spike_in,
  input  logic [4:0] delay,
  input  logic [5:0] st,          // {pend, cnt}
  output logic       spike_out,
  output logic [5:0] st_new
);
  logic       s_out;
  logic [5:0] s_new;
  always_comb begin
    s_new = st;
    s_out = 1'b0;
    if (st[5]) begin
      if (st[4:0] == 5'd1) begin
        s_out = 1'b1;
        s_new = 6'd0;
      end else begin
        s_new = {1'b1, st[4:0] - 5'd1};
      end
    end else if (spike_in) begin
      if (delay == 5'd0) s_out = 1'b1;
      else               s_new = {1'b1, delay};
    end
  end
  pipe_delay #(.W(7), .N(LAT)) u_d (.clk, .d({s_out, s_new}), .q({spike_out, st_new}));
endmodule
