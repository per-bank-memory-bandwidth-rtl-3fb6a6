// tagging_unit -- domain tagging and regulation forwarding at the cores.
//
// The unit sits right after the cores, on their request channels to the
// shared cache. A table of MMIO registers (one per core) says which
// regulation domain each core belongs to; any grouping of cores is allowed.
// Every request passing through is tagged with its core's domain, so that
// the cache and the DRAM regulator can attribute misses to the domain.
//
// Regulation forwarding: the unit also receives the D x N_bank throttle bits
// of the DRAM regulator. An AcquireBlock request whose (domain, DRAM bank)
// throttle bit is set is held back (valid to the bus and ready to the core
// are both low) until the bit clears. This limits the cache bandwidth a
// throttled domain can use, not only its DRAM bandwidth. Other requests and
// other cores are not affected.
//
// Follows the paper: MMIO core-to-domain table, tagging of every request,
// stalling of AcquireBlock only, D x N_bank throttle input. This design's
// choices: the register map (pbr_pkg), all cores in domain 0 after reset,
// the DRAM bank of a request found with bank_map, and a combinational path
// (no pipeline stage) from core to bus.
//
// Interface: per core a valid/ready request channel with address and an
// 'acquire' flag (AcquireBlock); the same channel toward the system bus with
// the domain added; MMIO register port with read data one cycle later.
module tagging_unit #(
  parameter int unsigned N_CORES      = pbr_pkg::N_CORES,
  parameter int unsigned N_DOMAINS    = pbr_pkg::N_DOMAINS,
  parameter int unsigned ADDR_W       = pbr_pkg::ADDR_W,
  parameter int unsigned N_BANK_BITS  = pbr_pkg::N_BANK_BITS,
  parameter logic [N_BANK_BITS-1:0][ADDR_W-1:0] BANK_FN = pbr_pkg::DEFAULT_BANK_FN,
  localparam int unsigned N_DRAM_BANKS = 1 << N_BANK_BITS,
  localparam int unsigned DW           = pbr_pkg::idx_w(N_DOMAINS)
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // configuration
  input  pbr_pkg::mmio_req_t                     mmio_req,
  output pbr_pkg::mmio_rsp_t                     mmio_rsp,
  // core side
  input  logic [N_CORES-1:0]                     core_valid,
  output logic [N_CORES-1:0]                     core_ready,
  input  logic [N_CORES-1:0][ADDR_W-1:0]         core_addr,
  input  logic [N_CORES-1:0]                     core_acquire,
  // system bus side
  output logic [N_CORES-1:0]                     bus_valid,
  input  logic [N_CORES-1:0]                     bus_ready,
  output logic [N_CORES-1:0][ADDR_W-1:0]         bus_addr,
  output logic [N_CORES-1:0]                     bus_acquire,
  output logic [N_CORES-1:0][DW-1:0]             bus_domain,
  // forwarded regulation
  input  logic [N_DOMAINS-1:0][N_DRAM_BANKS-1:0] throttle,
  output logic [N_CORES-1:0]                     stalled
);

  import pbr_pkg::*;

  logic [N_CORES-1:0][DW-1:0]          domain_q;
  logic [N_CORES-1:0][N_BANK_BITS-1:0] bank;

  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    bank_map #(
      .ADDR_W     (ADDR_W),
      .N_BANK_BITS(N_BANK_BITS),
      .BANK_FN    (BANK_FN)
    ) u_map (
      .addr(core_addr[c]),
      .bank(bank[c])
    );
  end

  always_comb begin
    for (int c = 0; c < N_CORES; c++) begin
      logic thr;
      thr = 1'b0;
      if (int'(domain_q[c]) < N_DOMAINS) thr = throttle[domain_q[c]][bank[c]];
      stalled[c]     = core_valid[c] && core_acquire[c] && thr;
      bus_valid[c]   = core_valid[c] && !stalled[c];
      core_ready[c]  = bus_ready[c] && !(core_acquire[c] && thr);
      bus_addr[c]    = core_addr[c];
      bus_acquire[c] = core_acquire[c];
      bus_domain[c]  = domain_q[c];
    end
  end

  // ---------------- core-to-domain table ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      domain_q <= '0;
      mmio_rsp <= '0;
    end else begin
      for (int c = 0; c < N_CORES; c++) begin
        if (mmio_req.valid && mmio_req.write &&
            mmio_req.addr == REG_CORE_DOMAIN + MMIO_AW'(4 * c)) begin
          domain_q[c] <= mmio_req.wdata[DW-1:0];
        end
      end
      mmio_rsp.rvalid <= mmio_req.valid && !mmio_req.write;
      mmio_rsp.rdata  <= '0;
      for (int c = 0; c < N_CORES; c++) begin
        if (mmio_req.valid && !mmio_req.write &&
            mmio_req.addr == REG_CORE_DOMAIN + MMIO_AW'(4 * c)) begin
          mmio_rsp.rdata <= MMIO_DW'(domain_q[c]);
        end
      end
    end
  end

`ifndef SYNTHESIS
  a_no_stalled_fire : assert property (@(posedge clk) disable iff (!rst_n)
    (stalled & bus_valid) == '0);
`endif

endmodule
