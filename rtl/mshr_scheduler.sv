// mshr_scheduler -- throttle-aware MSHR scheduler of one last-level-cache bank.
//
// Each MSHR of the cache bank presents a request to memory: valid, whether
// the cache resources it needs are free (res_ok), whether the request is a
// read (an AcquireBlock refill, the kind the regulator counts), the
// regulation domain of the core that caused the miss, and the address.
// A round-robin arbiter picks the next MSHR among the schedulable ones, and
// the winner's request is offered on the memory-side channel.
//
// As in the paper, an MSHR is schedulable when its resources are available
// and, added by the regulation, when the throttle bit of its (domain, DRAM
// bank) pair is clear. The DRAM bank comes from the address through
// bank_map. The stalled MSHR simply waits; other MSHRs (other domains or
// other banks) keep being served, so no extra request queue is needed.
//
// Only read requests are gated. This is this design's choice: the paper
// counts reads only ("We count TileLink AcquireBlock requests (reads)") and
// does not say whether write-backs are gated too.
//
// Timing: combinational from the MSHR inputs and throttle to mem_valid and
// the request fields; grant[i] is high in the cycle MSHR i's request is
// accepted (mem_valid && mem_ready). The arbiter pointer advances on that
// transfer.
module mshr_scheduler #(
  parameter int unsigned N_MSHRS      = pbr_pkg::N_MSHRS,
  parameter int unsigned N_DOMAINS    = pbr_pkg::N_DOMAINS,
  parameter int unsigned ADDR_W       = pbr_pkg::ADDR_W,
  parameter int unsigned N_BANK_BITS  = pbr_pkg::N_BANK_BITS,
  parameter logic [N_BANK_BITS-1:0][ADDR_W-1:0] BANK_FN = pbr_pkg::DEFAULT_BANK_FN,
  localparam int unsigned N_DRAM_BANKS = 1 << N_BANK_BITS,
  localparam int unsigned DW           = pbr_pkg::idx_w(N_DOMAINS),
  localparam int unsigned MW           = pbr_pkg::idx_w(N_MSHRS)
) (
  input  logic                                     clk,
  input  logic                                     rst_n,
  // MSHR requests
  input  logic [N_MSHRS-1:0]                       mshr_valid,
  input  logic [N_MSHRS-1:0]                       mshr_res_ok,
  input  logic [N_MSHRS-1:0]                       mshr_read,
  input  logic [N_MSHRS-1:0][DW-1:0]               mshr_domain,
  input  logic [N_MSHRS-1:0][ADDR_W-1:0]           mshr_addr,
  output logic [N_MSHRS-1:0]                       mshr_grant,
  output logic [N_MSHRS-1:0]                       mshr_throttled,
  // throttle bits from the DRAM regulator
  input  logic [N_DOMAINS-1:0][N_DRAM_BANKS-1:0]   throttle,
  // memory-side request channel
  output logic                                     mem_valid,
  input  logic                                     mem_ready,
  output logic [ADDR_W-1:0]                        mem_addr,
  output logic [DW-1:0]                            mem_domain,
  output logic                                     mem_read,
  output logic [MW-1:0]                            mem_mshr
);

  logic [N_MSHRS-1:0][N_BANK_BITS-1:0] bank;
  logic [N_MSHRS-1:0]                  sched;
  logic [N_MSHRS-1:0]                  win;
  logic [MW-1:0]                       win_idx;
  logic                                any;

  for (genvar i = 0; i < N_MSHRS; i++) begin : g_map
    bank_map #(
      .ADDR_W     (ADDR_W),
      .N_BANK_BITS(N_BANK_BITS),
      .BANK_FN    (BANK_FN)
    ) u_map (
      .addr(mshr_addr[i]),
      .bank(bank[i])
    );
  end

  always_comb begin
    for (int i = 0; i < N_MSHRS; i++) begin
      logic thr;
      thr = 1'b0;
      if (int'(mshr_domain[i]) < N_DOMAINS) thr = throttle[mshr_domain[i]][bank[i]];
      mshr_throttled[i] = mshr_valid[i] && mshr_read[i] && thr;
      sched[i]          = mshr_valid[i] && mshr_res_ok[i] && !mshr_throttled[i];
    end
  end

  rr_arbiter #(.N(N_MSHRS)) u_arb (
    .clk    (clk),
    .rst_n  (rst_n),
    .req    (sched),
    .advance(mem_ready),
    .any    (any),
    .win    (win),
    .win_idx(win_idx)
  );

  assign mem_valid  = any;
  assign mem_addr   = mshr_addr[win_idx];
  assign mem_domain = mshr_domain[win_idx];
  assign mem_read   = mshr_read[win_idx];
  assign mem_mshr   = win_idx;
  assign mshr_grant = mem_ready ? win : '0;

`ifndef SYNTHESIS
  // a throttled read is never granted
  a_no_throttled_grant : assert property (@(posedge clk) disable iff (!rst_n)
    (mshr_grant & mshr_throttled) == '0);
`endif

endmodule
