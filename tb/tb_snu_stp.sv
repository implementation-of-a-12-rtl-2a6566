// tb_snu_stp: random states, parameters and spikes streamed through snu_stp one per
// clock; each result, 21 clocks later, is compared with the short-term plasticity
// step written out in integer arithmetic (Q0.10 states, Q0.16 factors).
module tb_snu_stp;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic spike;
  logic [9:0] u, x, s, u_inc, a_amp, u_new, x_new, s_new;
  logic [15:0] dec_f, rec_d, dec_s;
  snu_stp dut (.clk, .spike, .u, .x, .s, .u_inc, .a_amp, .dec_f, .rec_d, .dec_s, .u_new, .x_new, .s_new);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat(input int v); return v > 1023 ? 1023 : v; endfunction

  int q [$];
  initial begin
    for (int i = 0; i < 3021; i++) begin
      @(negedge clk);
      if (i < 3000) begin
        int um, up, xm, xp, sm, sp, ux;
        spike = 1'($urandom); u = 10'($urandom); x = 10'($urandom); s = 10'($urandom);
        u_inc = 10'($urandom); a_amp = 10'($urandom);
        dec_f = 16'($urandom); rec_d = 16'($urandom >> 4); dec_s = 16'($urandom);
        um = (int'(u) * int'(dec_f)) >> 16;
        up = spike ? sat(um + ((int'(u_inc) * (1024 - um)) >> 10)) : um;
        xm = sat(int'(x) + (((1024 - int'(x)) * int'(rec_d)) >> 16));
        ux = (up * xm) >> 10;
        xp = spike ? xm - ux : xm;
        sm = (int'(s) * int'(dec_s)) >> 16;
        sp = spike ? sat(sm + ((int'(a_amp) * ux) >> 10)) : sm;
        q.push_back((up << 20) | (xp << 10) | sp);
      end
      if (i >= 21) begin
        int e;
        e = q.pop_front();
        checks++;
        if ({u_new, x_new, s_new} != 30'(e)) begin
          failures++;
          if (failures < 10) $display("FAIL %0d: %h expected %h", i, {u_new, x_new, s_new}, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
