// tb_control_unit: a control unit with 5 neurons and 4 substeps per network
// timestep. Runs 3 network timesteps and checks every issued schedule word (slot,
// neuron index, substep in order, without gaps), the run length of exactly
// 3 x 20 clocks, the step counter, the drain and the 'done' pulse; then a second run.
module tb_control_unit;
  import hh_pkg::*;
  localparam int NN = 5, NK = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start, busy, done;
  logic [31:0] n_steps, step;
  sched_t sched;
  control_unit #(.N_NEURON(NN), .N_SUBSTEP(NK), .DRAIN(8)) dut (.clk, .rst_n, .start, .n_steps, .sched,
    .busy, .done, .step);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string s);
    failures++;
    if (failures < 10) $display("FAIL %s", s);
  endtask

  task automatic run(input int ns);
    int issued, cycles;
    @(negedge clk);
    start = 1; n_steps = ns;
    @(negedge clk);
    start = 0;
    issued = 0; cycles = 0;
    while (!done && cycles < 1000) begin
      if (sched.run) begin
        int s;
        s = issued % (NN * NK);
        checks++;
        if (int'(sched.slot) != s || int'(sched.nidx) != s % NN || int'(sched.substep) != s / NN)
          fail($sformatf("issue %0d: slot %0d nidx %0d substep %0d", issued, sched.slot, sched.nidx, sched.substep));
        if (int'(step) != issued / (NN * NK)) fail($sformatf("step counter %0d at issue %0d", step, issued));
        issued++;
      end
      checks++;
      if (!busy) fail("not busy during a run");
      @(negedge clk);
      cycles++;
    end
    checks += 3;
    if (issued != ns * NN * NK) fail($sformatf("issued %0d", issued));
    if (cycles != ns * NN * NK + 8) fail($sformatf("run took %0d clocks", cycles));
    if (step != 32'(ns)) fail($sformatf("step %0d", step));
    @(negedge clk);
    checks++;
    if (busy || done) fail("not idle after done");
  endtask

  initial begin
    rst_n = 0; start = 0; n_steps = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (busy || sched.run) fail("busy after reset");
    run(3);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
