// tb_dendrite_unit: streams random P = 2 currents per slot for 6 neurons with
// random numbers of slots (1..5, with idle clocks between), and checks every
// neuron's Netsum (the sum of all its currents) through the read port, plus
// clearing by the initialisation port.
module tb_dendrite_unit;
  import hh_pkg::*;
  localparam int NN = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n;
  slot_tag_t tag;
  logic signed [31:0] isyn [2];
  logic [LID_W-1:0] netsum_raddr;
  logic signed [31:0] netsum_rdata;
  cfg_wr_t cfg;
  dendrite_unit #(.P(2), .N_NEURON(NN)) dut (.clk, .rst_n, .tag, .isyn, .netsum_raddr, .netsum_rdata,
    .cfg, .cfg_sel(1'b1));

  int sum [NN];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_check(input int n, input int e);
    @(negedge clk) netsum_raddr = LID_W'(n);
    @(posedge clk); #1;
    checks++;
    if (netsum_rdata != e) begin
      failures++;
      if (failures < 10) $display("FAIL neuron %0d: %0d expected %0d", n, netsum_rdata, e);
    end
  endtask

  initial begin
    rst_n = 0; tag = '0; isyn[0] = 0; isyn[1] = 0; cfg = '0; netsum_raddr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < NN; n++) begin
      @(negedge clk);
      cfg.we = 1; cfg.tgt = CFG_NSTATE; cfg.addr = SLOT_W'(n);
    end
    @(negedge clk) cfg = '0;
    for (int n = 0; n < NN; n++) read_check(n, 0);
    for (int r = 0; r < 20; r++) begin
      for (int n = 0; n < NN; n++) begin
        int k;
        k = $urandom_range(5, 1);
        sum[n] = 0;
        for (int j = 0; j < k; j++) begin
          @(negedge clk);
          isyn[0] = int'($urandom) >>> 8; isyn[1] = int'($urandom) >>> 8;
          tag = '{valid: 1'b1, last: (j == k - 1), post: LID_W'(n)};
          sum[n] += isyn[0] + isyn[1];
          if ($urandom_range(3, 0) == 0) begin
            @(negedge clk) tag = '0; isyn[0] = 32'($urandom); isyn[1] = 32'($urandom);   // idle clock
          end
        end
      end
      @(negedge clk) tag = '0;
      for (int n = 0; n < NN; n++) read_check(n, sum[n]);
    end
    @(negedge clk);
    cfg.we = 1; cfg.tgt = CFG_NSTATE; cfg.addr = SLOT_W'(2);
    @(negedge clk) cfg = '0;
    read_check(2, 0);
    read_check(3, sum[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
