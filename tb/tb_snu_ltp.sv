// tb_snu_ltp: random traces, weights, parameters and pre/post spikes streamed
// through snu_ltp; each result, 21 clocks later, is compared with the STDP step in
// integer arithmetic (potentiation on a postsynaptic spike, then depression on a
// presynaptic spike, then the presynaptic trace increment).
module tb_snu_ltp;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic spike, spike_post;
  logic [15:0] stdp_post, dec_plus;
  logic [9:0] xj, w, a_plus, eta_plus, eta_minus, wmax, xj_new, w_new;
  snu_ltp dut (.clk, .spike, .spike_post, .stdp_post, .xj, .w, .a_plus, .eta_plus, .eta_minus, .wmax,
               .dec_plus, .xj_new, .w_new);

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
        int xjm, room, w1, w2, xjp;
        spike = 1'($urandom); spike_post = 1'($urandom); stdp_post = 16'($urandom);
        xj = 10'($urandom); w = 10'($urandom); a_plus = 10'($urandom); eta_plus = 10'($urandom);
        eta_minus = 10'($urandom); wmax = 10'($urandom); dec_plus = 16'($urandom);
        xjm  = (int'(xj) * int'(dec_plus)) >> 16;
        room = (wmax > w) ? int'(wmax) - int'(w) : 0;
        w1   = spike_post ? sat(int'(w) + ((((room * int'(eta_plus)) >> 10) * xjm) >> 10)) : int'(w);
        w2   = spike ? w1 - ((((w1 * int'(eta_minus)) >> 10) * (int'(stdp_post) >> 6)) >> 10) : w1;
        xjp  = spike ? sat(xjm + int'(a_plus)) : xjm;
        q.push_back((xjp << 10) | w2);
      end
      if (i >= 21) begin
        int e;
        e = q.pop_front();
        checks++;
        if ({xj_new, w_new} != 20'(e)) begin
          failures++;
          if (failures < 10) $display("FAIL %0d: %h expected %h", i, {xj_new, w_new}, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
