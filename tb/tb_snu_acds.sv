// tb_snu_acds: random spike trains and delays 0..24 through snu_acds, one
// synapse state carried from step to step by the testbench; every accepted spike
// must leave exactly 'delay' steps later, and every result 2 clocks after its input.
module tb_snu_acds;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int nout = 0;
  always @(posedge clk) if (spike_out) nout <= nout + 1;
  logic spike_in, spike_out;
  logic [4:0] delay;
  logic [5:0] st, st_new;
  snu_acds dut (.clk, .spike_in, .delay, .st, .spike_out, .st_new);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int due;
    bit e;
    int rr;
    logic [5:0] s;
    st = '0; spike_in = 0; delay = 0;
    for (int run = 0; run < 30; run++) begin
      delay = (run < 2) ? 5'(run * 24) : 5'($urandom_range(24, 0));
      s = '0; due = -1;
      for (int t = 0; t < 300; t++) begin
        @(negedge clk);
        rr = int'($urandom % 100);
        spike_in = rr < 8;
        st = s;
        e = 0;
        if (due == t) begin e = 1; due = -1; end
        else if (due < 0 && spike_in) begin
          if (delay == 0) e = 1; else due = t + int'(delay);
        end
        repeat (2) @(posedge clk);
        #1;
        checks++;
        if (spike_out != e) begin
          failures++;
          if (failures < 10) $display("FAIL run %0d t %0d: %0d expected %0d", run, t, spike_out, e);
        end
        s = st_new;
      end
    end
    checks++;
    $display("outputs %0d", nout);
    if (nout == 0) begin failures++; $display("FAIL no delayed spike"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
