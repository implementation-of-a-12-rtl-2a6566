// tb_nu_read: a network unit with 40 synapse slots and an MX of 8 banks x 8 neurons.
// MM gets random presynaptic ids, MX random spikes; then the slot address runs
// 0..39 one per clock, as in a network timestep, and every output (two clocks after
// its slot) must be the spike of the slot's presynaptic neuron. Repeated after the
// axon bus has rewritten some spikes, which must show up at once.
module tb_nu_read;
  import hh_pkg::*;
  localparam int NH = 8, D = 8, NS = 40;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [SLOT_W-1:0] slot;
  logic spike_out;
  axon_wr_t axon [NH];
  cfg_wr_t cfg;
  nu_read #(.N_SLOT(NS), .N_HN(NH), .BANK_DEPTH(D)) dut (.clk, .slot, .spike_out, .axon, .cfg, .cfg_sel(1'b1));

  bit spikes [NH][D];
  int pre [NS];
  int ones;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic sweep();
    int exp_q [$];
    for (int t = 0; t < NS + 2; t++) begin
      @(negedge clk);
      if (t < NS) begin
        slot = SLOT_W'(t);
        exp_q.push_back(int'(spikes[pre[t] / D][pre[t] % D]));
      end
      if (t >= 2) begin
        int e;
        e = exp_q.pop_front();
        checks++;
        if (int'(spike_out) != e) begin
          failures++;
          if (failures < 10) $display("FAIL slot %0d: %0d expected %0d", t - 2, spike_out, e);
        end
        if (e == 1) ones++;
      end
    end
  endtask

  initial begin
    cfg = '0; slot = '0; ones = 0;
    for (int b = 0; b < NH; b++) axon[b] = '0;
    for (int b = 0; b < NH; b++)
      for (int a = 0; a < D; a++) begin
        @(negedge clk);
        spikes[b][a] = 1'($urandom);
        cfg.we = 1; cfg.tgt = CFG_MX; cfg.addr = SLOT_W'({HN_W'(b), LID_W'(a)}); cfg.data = 256'(spikes[b][a]);
      end
    for (int t = 0; t < NS; t++) begin
      @(negedge clk);
      pre[t] = $urandom_range(NH * D - 1, 0);
      cfg.we = 1; cfg.tgt = CFG_MM; cfg.addr = SLOT_W'(t);
      cfg.data = 256'({HN_W'(pre[t] / D), LID_W'(pre[t] % D)});
    end
    @(negedge clk) cfg = '0;
    sweep();
    for (int r = 0; r < 10; r++) begin
      @(negedge clk);
      for (int b = 0; b < NH; b++) begin
        int a;
        a = $urandom_range(D - 1, 0);
        axon[b] = '{we: 1'b1, addr: LID_W'(a), data: ~spikes[b][a]};
        spikes[b][a] = ~spikes[b][a];
      end
      @(negedge clk);
      for (int b = 0; b < NH; b++) axon[b] = '0;
      sweep();
    end
    checks++;
    if (ones == 0) begin failures++; $display("FAIL no spike read"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
