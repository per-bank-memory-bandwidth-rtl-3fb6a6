// pbr_soc_top -- per-bank DRAM bandwidth regulation fabric of a multicore SoC.
//
// This module joins the parts of the SoC that carry the regulation:
//   * the tagging unit on the core request channels, which tags each request
//     with the regulation domain of its core and holds back AcquireBlock
//     requests of throttled (domain, DRAM bank) pairs (regulation forwarding);
//   * one throttle-aware MSHR scheduler per last-level-cache bank, which picks
//     the MSHR that issues to memory next and skips MSHRs whose
//     (domain, DRAM bank) is throttled;
//   * the DRAM regulator at the cache top level, which counts the reads each
//     cache bank sends to memory per domain and per DRAM bank within a fixed
//     period and drives the D x N_bank throttle bits to both of the above.
// The cores, the cache banks' other logic (directory, data arrays, MSHR
// state machines), the TileLink buses and the DRAM are not part of this
// module: their channels are ports. The arrangement follows the SoC diagram
// of the paper (tagging unit between cores and system bus, regulator below
// the cache banks, forwarding path from regulator to tagging unit, both units
// configured from the periphery bus through MMIO).
//
// Ports:
//   core_*   request channels of the cores (valid/ready, address, AcquireBlock)
//   bus_*    the same channels toward the system bus, tagged with the domain
//   mshr_*   per cache bank and MSHR: pending request to memory
//   mem_*    per cache bank: request channel toward the memory bus
//   tag_mmio_*, reg_mmio_*  MMIO ports of the tagging unit and of the regulator
//   throttle, period_end    regulator state, for observation
// Defaults are the evaluated system: 4 cores, 2 domains, 2 cache banks with
// 27 MSHRs each, 8 DRAM banks mapped by address bits 9..11.
module pbr_soc_top #(
  parameter int unsigned N_CORES      = pbr_pkg::N_CORES,
  parameter int unsigned N_DOMAINS    = pbr_pkg::N_DOMAINS,
  parameter int unsigned N_LLC_BANKS  = pbr_pkg::N_LLC_BANKS,
  parameter int unsigned N_MSHRS      = pbr_pkg::N_MSHRS,
  parameter int unsigned ADDR_W       = pbr_pkg::ADDR_W,
  parameter int unsigned N_BANK_BITS  = pbr_pkg::N_BANK_BITS,
  parameter logic [N_BANK_BITS-1:0][ADDR_W-1:0] BANK_FN = pbr_pkg::DEFAULT_BANK_FN,
  parameter int unsigned CNT_W        = pbr_pkg::CNT_W,
  localparam int unsigned N_DRAM_BANKS = 1 << N_BANK_BITS,
  localparam int unsigned DW           = pbr_pkg::idx_w(N_DOMAINS),
  localparam int unsigned MW           = pbr_pkg::idx_w(N_MSHRS)
) (
  input  logic                                        clk,
  input  logic                                        rst_n,
  // MMIO (periphery bus)
  input  pbr_pkg::mmio_req_t                          tag_mmio_req,
  output pbr_pkg::mmio_rsp_t                          tag_mmio_rsp,
  input  pbr_pkg::mmio_req_t                          reg_mmio_req,
  output pbr_pkg::mmio_rsp_t                          reg_mmio_rsp,
  // cores
  input  logic [N_CORES-1:0]                          core_valid,
  output logic [N_CORES-1:0]                          core_ready,
  input  logic [N_CORES-1:0][ADDR_W-1:0]              core_addr,
  input  logic [N_CORES-1:0]                          core_acquire,
  // system bus
  output logic [N_CORES-1:0]                          bus_valid,
  input  logic [N_CORES-1:0]                          bus_ready,
  output logic [N_CORES-1:0][ADDR_W-1:0]              bus_addr,
  output logic [N_CORES-1:0]                          bus_acquire,
  output logic [N_CORES-1:0][DW-1:0]                  bus_domain,
  output logic [N_CORES-1:0]                          core_stalled,
  // MSHRs of the cache banks
  input  logic [N_LLC_BANKS-1:0][N_MSHRS-1:0]         mshr_valid,
  input  logic [N_LLC_BANKS-1:0][N_MSHRS-1:0]         mshr_res_ok,
  input  logic [N_LLC_BANKS-1:0][N_MSHRS-1:0]         mshr_read,
  input  logic [N_LLC_BANKS-1:0][N_MSHRS-1:0][DW-1:0] mshr_domain,
  input  logic [N_LLC_BANKS-1:0][N_MSHRS-1:0][ADDR_W-1:0] mshr_addr,
  output logic [N_LLC_BANKS-1:0][N_MSHRS-1:0]         mshr_grant,
  output logic [N_LLC_BANKS-1:0][N_MSHRS-1:0]         mshr_throttled,
  // memory bus
  output logic [N_LLC_BANKS-1:0]                      mem_valid,
  input  logic [N_LLC_BANKS-1:0]                      mem_ready,
  output logic [N_LLC_BANKS-1:0][ADDR_W-1:0]          mem_addr,
  output logic [N_LLC_BANKS-1:0][DW-1:0]              mem_domain,
  output logic [N_LLC_BANKS-1:0]                      mem_read,
  output logic [N_LLC_BANKS-1:0][MW-1:0]              mem_mshr,
  // regulator state
  output logic [N_DOMAINS-1:0][N_DRAM_BANKS-1:0]      throttle,
  output logic                                        period_end
);

  tagging_unit #(
    .N_CORES    (N_CORES),
    .N_DOMAINS  (N_DOMAINS),
    .ADDR_W     (ADDR_W),
    .N_BANK_BITS(N_BANK_BITS),
    .BANK_FN    (BANK_FN)
  ) u_tag (
    .clk         (clk),
    .rst_n       (rst_n),
    .mmio_req    (tag_mmio_req),
    .mmio_rsp    (tag_mmio_rsp),
    .core_valid  (core_valid),
    .core_ready  (core_ready),
    .core_addr   (core_addr),
    .core_acquire(core_acquire),
    .bus_valid   (bus_valid),
    .bus_ready   (bus_ready),
    .bus_addr    (bus_addr),
    .bus_acquire (bus_acquire),
    .bus_domain  (bus_domain),
    .throttle    (throttle),
    .stalled     (core_stalled)
  );

  for (genvar l = 0; l < N_LLC_BANKS; l++) begin : g_llc
    mshr_scheduler #(
      .N_MSHRS    (N_MSHRS),
      .N_DOMAINS  (N_DOMAINS),
      .ADDR_W     (ADDR_W),
      .N_BANK_BITS(N_BANK_BITS),
      .BANK_FN    (BANK_FN)
    ) u_sched (
      .clk           (clk),
      .rst_n         (rst_n),
      .mshr_valid    (mshr_valid[l]),
      .mshr_res_ok   (mshr_res_ok[l]),
      .mshr_read     (mshr_read[l]),
      .mshr_domain   (mshr_domain[l]),
      .mshr_addr     (mshr_addr[l]),
      .mshr_grant    (mshr_grant[l]),
      .mshr_throttled(mshr_throttled[l]),
      .throttle      (throttle),
      .mem_valid     (mem_valid[l]),
      .mem_ready     (mem_ready[l]),
      .mem_addr      (mem_addr[l]),
      .mem_domain    (mem_domain[l]),
      .mem_read      (mem_read[l]),
      .mem_mshr      (mem_mshr[l])
    );
  end

  dram_regulator #(
    .N_DOMAINS  (N_DOMAINS),
    .N_LLC_BANKS(N_LLC_BANKS),
    .ADDR_W     (ADDR_W),
    .N_BANK_BITS(N_BANK_BITS),
    .BANK_FN    (BANK_FN),
    .CNT_W      (CNT_W)
  ) u_reg (
    .clk       (clk),
    .rst_n     (rst_n),
    .mmio_req  (reg_mmio_req),
    .mmio_rsp  (reg_mmio_rsp),
    .mem_fire  (mem_valid & mem_ready),
    .mem_read  (mem_read),
    .mem_domain(mem_domain),
    .mem_addr  (mem_addr),
    .throttle  (throttle),
    .period_end(period_end)
  );

endmodule
