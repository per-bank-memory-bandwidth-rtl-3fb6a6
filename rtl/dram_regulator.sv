// dram_regulator -- per-domain, per-DRAM-bank memory bandwidth regulator.
//
// The regulator sits at the top level of the last-level cache and watches the
// requests the cache banks send to memory. It follows a fixed-rate scheme:
// a global period of P cycles, and for every regulation domain d a budget of
// N_acc[d] accesses per period that applies to each DRAM bank separately.
// For every (domain, bank) pair it keeps a counter of the reads issued in the
// current period; each read is attributed to the domain tag it carries and to
// the bank its address maps to (bank_map). When the counter of a pair has
// reached the domain's budget and regulation is enabled for that domain, the
// pair's throttle bit is raised. The throttle bits go to the MSHR schedulers
// of the cache banks and are forwarded to the tagging unit. At each period
// boundary all counters are cleared, which replenishes every budget; a read
// issued in the very last cycle of a period is charged to the next period.
// The bandwidth a domain gets per bank is N_acc / P * 64 B * f_clk, and the
// total it can get scales with the number of banks.
//
// Follows the paper: fixed period, per-domain budget registers, a single
// global period register, per-domain enable, per-(domain, bank) counters of
// reads (AcquireBlock) only, throttle of D x N_bank bits.
// This design's choices: the register map (pbr_pkg), reset values (period
// 1,000,000 cycles, all budgets 0, regulation disabled), a write to the period
// register restarting the period, counters readable over MMIO, and the
// throttle condition "count >= budget" so that at most N_acc reads per bank
// pass in a period. Because the throttle is computed from registered
// counters, reads to the same (domain, bank) issued in the same cycle by
// different cache banks can overshoot the budget by at most N_LLC_BANKS-1.
//
// Interface: MMIO register port (pbr_pkg::mmio_req_t / mmio_rsp_t, read data
// one cycle after the request); one observation port per cache bank (fire,
// read, domain, address) sampled at the clock edge; throttle output,
// registered-state based, valid from the cycle after a counted read.
module dram_regulator #(
  parameter int unsigned N_DOMAINS    = pbr_pkg::N_DOMAINS,
  parameter int unsigned N_LLC_BANKS  = pbr_pkg::N_LLC_BANKS,
  parameter int unsigned ADDR_W       = pbr_pkg::ADDR_W,
  parameter int unsigned N_BANK_BITS  = pbr_pkg::N_BANK_BITS,
  parameter logic [N_BANK_BITS-1:0][ADDR_W-1:0] BANK_FN = pbr_pkg::DEFAULT_BANK_FN,
  parameter int unsigned CNT_W        = pbr_pkg::CNT_W,
  parameter logic [CNT_W-1:0] RESET_PERIOD = CNT_W'(1_000_000),
  localparam int unsigned N_DRAM_BANKS = 1 << N_BANK_BITS,
  localparam int unsigned DW           = pbr_pkg::idx_w(N_DOMAINS)
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // configuration
  input  pbr_pkg::mmio_req_t                     mmio_req,
  output pbr_pkg::mmio_rsp_t                     mmio_rsp,
  // memory requests leaving the cache banks
  input  logic [N_LLC_BANKS-1:0]                 mem_fire,
  input  logic [N_LLC_BANKS-1:0]                 mem_read,
  input  logic [N_LLC_BANKS-1:0][DW-1:0]         mem_domain,
  input  logic [N_LLC_BANKS-1:0][ADDR_W-1:0]     mem_addr,
  // regulation outputs
  output logic [N_DOMAINS-1:0][N_DRAM_BANKS-1:0] throttle,
  output logic                                   period_end
);

  import pbr_pkg::*;

  localparam int unsigned IW = $clog2(N_LLC_BANKS + 1);

  logic [N_DOMAINS-1:0]                          enable_q;
  logic [CNT_W-1:0]                              period_q;
  logic [N_DOMAINS-1:0][CNT_W-1:0]               budget_q;
  logic [N_DOMAINS-1:0][N_DRAM_BANKS-1:0][CNT_W-1:0] cnt_q;
  logic [CNT_W-1:0]                              timer_q;

  logic [N_LLC_BANKS-1:0][N_BANK_BITS-1:0]       bank;
  logic [N_DOMAINS-1:0][N_DRAM_BANKS-1:0][IW-1:0] inc;

  // ---------------- bank of each observed request ----------------
  for (genvar l = 0; l < N_LLC_BANKS; l++) begin : g_map
    bank_map #(
      .ADDR_W     (ADDR_W),
      .N_BANK_BITS(N_BANK_BITS),
      .BANK_FN    (BANK_FN)
    ) u_map (
      .addr(mem_addr[l]),
      .bank(bank[l])
    );
  end

  // ---------------- MMIO decode ----------------
  logic wr_en, wr_period;
  assign wr_en     = mmio_req.valid && mmio_req.write && (mmio_req.addr == REG_ENABLE);
  assign wr_period = mmio_req.valid && mmio_req.write && (mmio_req.addr == REG_PERIOD);

  // ---------------- period timer ----------------
  // The period is P cycles: timer runs 0 .. P-1. P = 0 behaves as P = 1.
  assign period_end = (timer_q >= period_q - CNT_W'(1)) || (period_q == '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      timer_q <= '0;
    end else if (wr_period || period_end) begin
      timer_q <= '0;
    end else begin
      timer_q <= timer_q + CNT_W'(1);
    end
  end

  // ---------------- per-(domain, bank) read counts of this cycle ----------------
  always_comb begin
    inc = '0;
    for (int l = 0; l < N_LLC_BANKS; l++) begin
      for (int d = 0; d < N_DOMAINS; d++) begin
        if (mem_fire[l] && mem_read[l] && (int'(mem_domain[l]) == d)) begin
          inc[d][bank[l]] = inc[d][bank[l]] + IW'(1);
        end
      end
    end
  end

  // ---------------- counters (saturating) ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt_q <= '0;
    end else begin
      for (int d = 0; d < N_DOMAINS; d++) begin
        for (int b = 0; b < N_DRAM_BANKS; b++) begin
          logic [CNT_W:0] sum;
          if (wr_period || period_end) begin
            // new period: budgets replenished. A read issued in the last
            // cycle of a period is counted in the next one, so none escapes.
            cnt_q[d][b] <= CNT_W'(inc[d][b]);
          end else begin
            sum = {1'b0, cnt_q[d][b]} + (CNT_W+1)'(inc[d][b]);
            cnt_q[d][b] <= sum[CNT_W] ? '1 : sum[CNT_W-1:0];
          end
        end
      end
    end
  end

  // ---------------- throttle ----------------
  always_comb begin
    for (int d = 0; d < N_DOMAINS; d++) begin
      for (int b = 0; b < N_DRAM_BANKS; b++) begin
        throttle[d][b] = enable_q[d] && (cnt_q[d][b] >= budget_q[d]);
      end
    end
  end

  // ---------------- configuration registers ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      enable_q <= '0;
      period_q <= RESET_PERIOD;
      budget_q <= '0;
    end else begin
      if (wr_en)     enable_q <= mmio_req.wdata[N_DOMAINS-1:0];
      if (wr_period) period_q <= CNT_W'(mmio_req.wdata);
      for (int d = 0; d < N_DOMAINS; d++) begin
        if (mmio_req.valid && mmio_req.write &&
            mmio_req.addr == REG_BUDGET + MMIO_AW'(4 * d)) begin
          budget_q[d] <= CNT_W'(mmio_req.wdata);
        end
      end
    end
  end

  // ---------------- register read-back ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mmio_rsp <= '0;
    end else begin
      mmio_rsp.rvalid <= mmio_req.valid && !mmio_req.write;
      mmio_rsp.rdata  <= '0;
      if (mmio_req.valid && !mmio_req.write) begin
        if (mmio_req.addr == REG_ENABLE) mmio_rsp.rdata <= MMIO_DW'(enable_q);
        if (mmio_req.addr == REG_PERIOD) mmio_rsp.rdata <= MMIO_DW'(period_q);
        for (int d = 0; d < N_DOMAINS; d++) begin
          if (mmio_req.addr == REG_BUDGET + MMIO_AW'(4 * d))
            mmio_rsp.rdata <= MMIO_DW'(budget_q[d]);
          for (int b = 0; b < N_DRAM_BANKS; b++) begin
            if (mmio_req.addr == REG_COUNT + MMIO_AW'(4 * (d * N_DRAM_BANKS + b)))
              mmio_rsp.rdata <= MMIO_DW'(cnt_q[d][b]);
          end
        end
      end
    end
  end

`ifndef SYNTHESIS
  a_rvalid_after_read : assert property (@(posedge clk) disable iff (!rst_n)
    mmio_rsp.rvalid |-> $past(mmio_req.valid && !mmio_req.write));
`endif

endmodule
