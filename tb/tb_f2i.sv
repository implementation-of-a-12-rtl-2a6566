// tb_f2i: random potentials through f2i; checks Q7.8 truncation toward zero,
// saturation beyond +-128 mV and the one-clock latency.
module tb_f2i;
  import tb_util_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [31:0] i_fp;
  logic signed [15:0] o_fix;
  f2i dut (.clk, .i_fp, .o_fix);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real v, e;
    i_fp = 0;
    for (int i = 0; i < 3000; i++) begin
      v = (real'($urandom_range(600000, 0)) - 300000.0) / 1000.0;
      if (i == 0) v = 0.0;
      if (i == 1) v = -65.0;
      v = f2r(r2f(v));
      e = v * 256.0;
      e = (e < 0) ? -real'($rtoi(-e)) : real'($rtoi(e));
      if (e > 32767.0) e = 32767.0;
      if (e < -32768.0) e = -32768.0;
      @(negedge clk) i_fp = r2f(v);
      @(posedge clk); #1;
      checks++;
      if (real'(o_fix) != e) begin
        failures++;
        if (failures < 10) $display("FAIL %f -> %0d expected %f", v, o_fix, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
