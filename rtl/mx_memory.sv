// mx_memory: the MX spike memory of one network unit (the NU writing part).
//
// MX holds one spike bit for every neuron of the system, 2^24 x 1, built from N_HN
// dual-port banks of 2^21 words of which the first BANK_DEPTH (1.5 million) exist.
// The read side decodes the 24-bit neuron id {HN, local} onto the banks, so it acts
// as one memory (registered read, latency 1). The write ports stay separate: bank i
// is written only by axon-bus port i, which carries the spikes of hardware neuron i.
// Every NU of the system has its own MX on the same bus, so each spike is stored in
// all copies in the same clock. Reading a local index at or above BANK_DEPTH gives 0
// and a read of a word written in the same clock gives the old value (choices made
// here). The initialisation port (CFG_MX) writes a spike bit into the bank named by
// the id, in every MX alike, when the axon bus is idle.
module mx_memory
  import hh_pkg::*;
#(
  parameter int N_HN       = 8,
  parameter int BANK_DEPTH = 1500000
) (
  input  logic             clk,
  input  logic [NID_W-1:0] raddr,
  output logic             rdata,
  input  axon_wr_t         axon [N_HN],
  input  cfg_wr_t          cfg
);
  initial assert (N_HN <= 2**HN_W && BANK_DEPTH <= 2**LID_W);

  logic [N_HN-1:0] bank_q;
  logic [HN_W-1:0] sel_q;
  logic            hit_q;

  for (genvar b = 0; b < N_HN; b++) begin : g_bank
    logic             mem [BANK_DEPTH];
    logic             we;
    logic [LID_W-1:0] wa;
    logic             wd;
    logic             cfg_we;
    assign cfg_we = cfg.we && cfg.tgt == CFG_MX && cfg.addr[NID_W-1:LID_W] == HN_W'(b);
    assign we = axon[b].we || cfg_we;
    assign wa = axon[b].we ? axon[b].addr : cfg.addr[LID_W-1:0];
    assign wd = axon[b].we ? axon[b].data : cfg.data[0];
    always_ff @(posedge clk) begin
      if (we && 32'(wa) < BANK_DEPTH) mem[wa] <= wd;
    end
    always_ff @(posedge clk) bank_q[b] <= mem[raddr[LID_W-1:0]];
  end

  always_ff @(posedge clk) begin
    sel_q <= raddr[NID_W-1:LID_W];
    hit_q <= 32'(raddr[NID_W-1:LID_W]) < N_HN && 32'(raddr[LID_W-1:0]) < BANK_DEPTH;
  end
  assign rdata = hit_q && bank_q[sel_q];
endmodule
