// tb_mx_memory: an MX of 8 banks of 16 real words (of 2^21). Random spikes are
// written through the initialisation port and through all 8 axon-bus ports at once;
// random 24-bit ids are read back and compared with a model, including ids beyond
// the real words of a bank (which read 0) and the one-clock read latency.
module tb_mx_memory;
  import hh_pkg::*;
  localparam int NH = 8, D = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NID_W-1:0] raddr;
  logic rdata;
  axon_wr_t axon [NH];
  cfg_wr_t cfg;
  mx_memory #(.N_HN(NH), .BANK_DEPTH(D)) dut (.clk, .raddr, .rdata, .axon, .cfg);

  bit model [NH][D];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_read(input int b, input int a);
    bit e;
    @(negedge clk);
    raddr = {HN_W'(b), LID_W'(a)};
    @(posedge clk); #1;
    e = (a < D) ? model[b][a] : 0;
    checks++;
    if (rdata != e) begin
      failures++;
      if (failures < 10) $display("FAIL read bank %0d addr %0d: %0d expected %0d", b, a, rdata, e);
    end
  endtask

  initial begin
    cfg = '0; raddr = '0;
    for (int b = 0; b < NH; b++) axon[b] = '0;
    // initialise every word through the back-end port
    for (int b = 0; b < NH; b++)
      for (int a = 0; a < D; a++) begin
        @(negedge clk);
        model[b][a] = 1'($urandom);
        cfg.we = 1; cfg.tgt = CFG_MX; cfg.addr = SLOT_W'({HN_W'(b), LID_W'(a)}); cfg.data = 256'(model[b][a]);
      end
    @(negedge clk) cfg = '0;
    for (int i = 0; i < 200; i++) check_read($urandom_range(NH - 1, 0), $urandom_range(D - 1, 0));
    // every HN writes through its own axon port in the same clock
    for (int r = 0; r < 50; r++) begin
      @(negedge clk);
      for (int b = 0; b < NH; b++) begin
        int a;
        a = $urandom_range(D - 1, 0);
        axon[b].we = 1'($urandom);
        axon[b].addr = LID_W'(a);
        axon[b].data = 1'($urandom);
        if (axon[b].we) model[b][a] = axon[b].data;
      end
      @(negedge clk);
      for (int b = 0; b < NH; b++) axon[b] = '0;
      for (int i = 0; i < 8; i++) check_read($urandom_range(NH - 1, 0), $urandom_range(D - 1, 0));
    end
    // addresses beyond the real words of a bank
    for (int i = 0; i < 20; i++) check_read($urandom_range(NH - 1, 0), $urandom_range(2**LID_W - 1, D));
    // whole contents
    for (int b = 0; b < NH; b++) for (int a = 0; a < D; a++) check_read(b, a);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
