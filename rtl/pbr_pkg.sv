// pbr_pkg -- shared types and constants of the per-bank DRAM bandwidth
// regulation fabric.
//
// The defaults describe the evaluated SoC: four cores, two regulation
// domains (real-time and best-effort), a two-bank last-level cache with 27
// MSHRs per bank, and an 8-bank DDR3 memory whose bank index is taken from
// physical address bits 9, 10 and 11. Those numbers follow the paper. The
// address width, the MMIO bus format and its register map are this design's
// own choices; the paper only says that the configuration is done through
// memory-mapped registers.
//
// MMIO bus: a single-cycle register port. A request is accepted in the cycle
// its valid bit is high. A read returns rdata with rvalid exactly one cycle
// later; a write has no response.
package pbr_pkg;

  // ---------------- system sizes (paper defaults) ----------------
  localparam int unsigned ADDR_W       = 32;  // 4 GB of DRAM
  localparam int unsigned N_CORES      = 4;
  localparam int unsigned N_DOMAINS    = 2;
  localparam int unsigned N_LLC_BANKS  = 2;
  localparam int unsigned N_MSHRS      = 27;  // per LLC bank
  localparam int unsigned N_BANK_BITS  = 3;
  localparam int unsigned N_DRAM_BANKS = 1 << N_BANK_BITS;

  // Direct bank map of the evaluated DDR3: b0 = A9, b1 = A10, b2 = A11.
  // Entry i is the mask of address bits XORed to form bank bit i.
  localparam logic [N_BANK_BITS-1:0][ADDR_W-1:0] DEFAULT_BANK_FN = '{
    32'h0000_0800,   // b2 : bit 11
    32'h0000_0400,   // b1 : bit 10
    32'h0000_0200    // b0 : bit 9
  };

  // Regulator counters and registers are 32 bits wide: a 1 ms period at
  // 1 GHz is 1,000,000 cycles.
  localparam int unsigned CNT_W = 32;

  // ---------------- MMIO register port ----------------
  localparam int unsigned MMIO_AW = 12;
  localparam int unsigned MMIO_DW = 32;

  typedef struct packed {
    logic               valid;
    logic               write;
    logic [MMIO_AW-1:0] addr;   // byte address, 32-bit registers
    logic [MMIO_DW-1:0] wdata;
  } mmio_req_t;

  typedef struct packed {
    logic               rvalid;
    logic [MMIO_DW-1:0] rdata;
  } mmio_rsp_t;

  // Regulator register map (byte offsets).
  localparam logic [MMIO_AW-1:0] REG_ENABLE = 12'h000;  // bit d: regulate domain d
  localparam logic [MMIO_AW-1:0] REG_PERIOD = 12'h004;  // period P in cycles
  localparam logic [MMIO_AW-1:0] REG_BUDGET = 12'h100;  // + 4*d : N_acc of domain d
  localparam logic [MMIO_AW-1:0] REG_COUNT  = 12'h400;  // + 4*(d*N_DRAM_BANKS+b), read only

  // Tagging unit register map: + 4*c holds the domain of core c.
  localparam logic [MMIO_AW-1:0] REG_CORE_DOMAIN = 12'h000;

  // Width of an index, never zero.
  function automatic int unsigned idx_w(input int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

endpackage
