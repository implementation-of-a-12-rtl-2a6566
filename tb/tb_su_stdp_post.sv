// tb_su_stdp_post: random traces, factors and spikes through su_stdp_post, checked
// against y*dec/2^16 (+ a_- on a spike, saturating at 0xffff).
module tb_su_stdp_post;
  int checks = 0, failures = 0;
  logic [15:0] y_old, dec_minus, a_minus, y_new;
  logic spike;
  su_stdp_post dut (.y_old, .spike, .dec_minus, .a_minus, .y_new);

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e;
    for (int i = 0; i < 5000; i++) begin
      y_old = 16'($urandom); dec_minus = 16'($urandom); a_minus = 16'($urandom >> $urandom_range(15, 0));
      spike = 1'($urandom);
      #1;
      e = (longint'(y_old) * longint'(dec_minus)) / 65536 + (spike ? longint'(a_minus) : 0);
      if (e > 65535) e = 65535;
      checks++;
      if (longint'(y_new) != e) begin
        failures++;
        if (failures < 10) $display("FAIL y=%0d dec=%0d a=%0d s=%0d: %0d vs %0d", y_old, dec_minus, a_minus, spike, y_new, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
