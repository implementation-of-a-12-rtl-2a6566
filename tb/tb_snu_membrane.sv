// tb_snu_membrane: random S, w, g_syn, E_syn and V_post streamed through
// snu_membrane; each current, 8 clocks later, is compared with
// S*w*g*(E - V) evaluated in real arithmetic (tolerance: the truncations of the
// fixed-point path), plus exact zero for g = 0 (null synapse).
module tb_snu_membrane;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [9:0] s, w;
  logic [15:0] gsyn;
  logic signed [15:0] esyn, v_post;
  logic signed [31:0] isyn;
  snu_membrane dut (.clk, .s, .w, .gsyn, .esyn, .v_post, .isyn);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real q [$];
  initial begin
    for (int i = 0; i < 3008; i++) begin
      @(negedge clk);
      if (i < 3000) begin
        s = 10'($urandom); w = 10'($urandom); gsyn = (i % 10 == 0) ? 16'd0 : 16'($urandom);
        esyn = 16'($urandom); v_post = 16'($urandom);
        q.push_back((real'(s) / 1024.0) * (real'(w) / 1024.0) * (real'(gsyn) / 4096.0) *
                    (real'(esyn) - real'(v_post)) / 256.0);
      end
      if (i >= 8) begin
        real e, got, d, tol;
        e = q.pop_front();
        got = real'(isyn) / 256.0;
        d = got - e; if (d < 0) d = -d;
        tol = 16.0 * 2.0 ** -10 * 256.0 + 2.0 ** -8;    // error of the truncated S*w and g*S*w
        checks++;
        if (d > tol || (e == 0.0 && isyn != 0)) begin
          failures++;
          if (failures < 10) $display("FAIL %0d: %f expected %f", i, got, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
