// tb_i2f: random fixed-point Netsum values through i2f; checks the float against
// the exact value v / 2^8 and the one-clock latency.
module tb_i2f;
  import tb_util_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic signed [31:0] i_fix;
  logic [31:0] o_fp;
  i2f dut (.clk, .i_fix, .o_fp);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v;
    i_fix = 0;
    for (int i = 0; i < 3000; i++) begin
      v = int'($urandom) >>> $urandom_range(31, 0);
      if (i == 0) v = 0;
      if (i == 1) v = 256;
      if (i == 2) v = -1;
      @(negedge clk) i_fix = v;
      @(posedge clk); #1;           // one clock later
      checks++;
      if (!close(f2r(o_fp), real'(v) / 256.0, 2.0 ** -23, 0)) begin
        failures++;
        if (failures < 10) $display("FAIL %0d -> %h", v, o_fp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
