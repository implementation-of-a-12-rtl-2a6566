// tb_su_acdn: plays su_acdn step by step (as the soma unit does once per network
// timestep) with random spike trains and delays 0..256, and checks that every
// accepted spike leaves exactly 'delay' steps later and that spikes arriving while
// one is in flight are dropped.
module tb_su_acdn;
  int checks = 0, failures = 0;
  logic       spike, spike_out;
  logic [8:0] delay;
  logic [9:0] st_old, st_new;
  su_acdn dut (.spike, .delay, .st_old, .st_new, .spike_out);

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int due;      // step at which the pending spike is due, -1 if none
    for (int run = 0; run < 40; run++) begin
      delay  = (run < 3) ? 9'(run * 128) : 9'($urandom_range(256, 0));
      st_old = '0;
      due    = -1;
      for (int t = 0; t < 700; t++) begin
        bit exp_out;
        spike = ($urandom_range(99, 0) < 3);
        #1;
        exp_out = 0;
        if (due == t) begin
          exp_out = 1; due = -1;
        end else if (due < 0 && spike) begin
          if (delay == 0) exp_out = 1;
          else due = t + int'(delay);
        end
        checks++;
        if (spike_out != exp_out) begin
          failures++;
          if (failures < 10) $display("FAIL run %0d t %0d delay %0d: out %0d expected %0d", run, t, delay, spike_out, exp_out);
        end
        st_old = st_new;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
