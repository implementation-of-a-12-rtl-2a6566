// pipe_delay: a W-bit shift register of N stages (N = 0 is a wire).
// Used to hold sideband data and attributes in step with a pipelined computation;
// this is the "shift register array" by which the control signals of the different
// units are offset in time. No reset: the stages only carry data qualified elsewhere.
module pipe_delay #(
  parameter int W = 1,
  parameter int N = 1
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (N == 0) begin : g_wire
    assign q = d;
  end else begin : g_pipe
    logic [W-1:0] r [N];
    always_ff @(posedge clk) begin
      r[0] <= d;
      for (int i = 1; i < N; i++) r[i] <= r[i-1];
    end
    assign q = r[N-1];
  end
endmodule
