// tb_hh_gate_lut: sweeps the membrane potential from -128 to +128 mV and checks the
// six rates against the Hodgkin-Huxley formulas evaluated at the centre of each
// 0.25 mV bin, and the one-clock latency.
module tb_hh_gate_lut;
  import tb_util_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic signed [15:0] v_fix;
  logic [31:0] rates [6];
  hh_gate_lut dut (.clk, .v_fix, .rates);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real v, vc;
    v_fix = 0;
    for (int i = 0; i < 2000; i++) begin
      v_fix = 16'($urandom);
      if (i < 4) v_fix = 16'(i == 0 ? -65*256 : i == 1 ? -55*256 : i == 2 ? -40*256 : 0);
      v  = real'(v_fix) / 256.0;
      vc = bin_centre(v);
      @(posedge clk); #1;
      for (int k = 0; k < 6; k++) begin
        checks++;
        if (!close(f2r(rates[k]), hh_rate(k, vc), 1e-6, 1e-30)) begin
          failures++;
          if (failures < 10) $display("FAIL V=%f rate %0d: %g vs %g", v, k, f2r(rates[k]), hh_rate(k, vc));
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
