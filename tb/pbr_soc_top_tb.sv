// pbr_soc_top_tb -- end-to-end test of the regulation fabric, all parameters
// at their defaults (4 cores, 2 domains, 2 cache banks x 27 MSHRs, 8 DRAM
// banks on address bits 11:9, 32-bit counters).
//
// Set-up, as in the evaluated system: core 0 alone in the real-time domain 0,
// which is not regulated; cores 1-3 in the best-effort domain 1, regulated
// with a budget of B reads per bank per period of P cycles (short values so
// that many periods fit in the simulation).
//
// The cache banks are modelled behaviourally: every MSHR holds a miss of a
// fixed domain (every fourth MSHR real-time), is re-armed a few cycles after
// it is granted with a new address, and its resources are free most of the
// time. The memory bus accepts most cycles. The cores issue random requests.
//
// Phases:
//   SB  best-effort misses all go to DRAM bank 3 (single-bank attack);
//   AB  best-effort misses spread over all 8 banks (all-bank traffic).
// Checked:
//   * in every period window, each bank gets at most B + (cache banks - 1)
//     best-effort reads, and a saturated bank gets at least B;
//   * the best-effort throughput in AB is at least 5x that in SB (the
//     per-bank budget scales with the number of banks, ideally 8x);
//   * real-time MSHRs are never throttled, writes are never throttled;
//   * the tagging unit tags each core's domain and stalls exactly the
//     AcquireBlocks of throttled (domain, bank) pairs.
// Mechanisms counted (each must occur): MSHR throttled, core AcquireBlock
// stalled, budget replenished at a period boundary, a best-effort read
// granted on one bank while another bank of the same domain is throttled,
// a real-time read granted while best-effort is throttled, a write granted
// to a throttled pair.
module pbr_soc_top_tb;
  import pbr_pkg::*;

  localparam int NC = 4, ND = 2, NL = 2, NM = 27, NB = 8;
  localparam int P = 200;
  localparam int B = 4;
  localparam int PERIODS_PER_PHASE = 20;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  int checks = 0, failures = 0;

  mmio_req_t tag_mmio_req, reg_mmio_req;
  mmio_rsp_t tag_mmio_rsp, reg_mmio_rsp;
  logic [NC-1:0]            core_valid, core_ready, core_acquire, bus_valid, bus_ready, bus_acquire, core_stalled;
  logic [NC-1:0][31:0]      core_addr, bus_addr;
  logic [NC-1:0][0:0]       bus_domain;
  logic [NL-1:0][NM-1:0]    mshr_valid, mshr_res_ok, mshr_read, mshr_grant, mshr_throttled;
  logic [NL-1:0][NM-1:0][0:0]  mshr_domain;
  logic [NL-1:0][NM-1:0][31:0] mshr_addr;
  logic [NL-1:0]            mem_valid, mem_ready, mem_read;
  logic [NL-1:0][31:0]      mem_addr;
  logic [NL-1:0][0:0]       mem_domain;
  logic [NL-1:0][4:0]       mem_mshr;
  logic [ND-1:0][NB-1:0]    throttle;
  logic                     period_end;

  pbr_soc_top dut (
    .clk(clk), .rst_n(rst_n),
    .tag_mmio_req(tag_mmio_req), .tag_mmio_rsp(tag_mmio_rsp),
    .reg_mmio_req(reg_mmio_req), .reg_mmio_rsp(reg_mmio_rsp),
    .core_valid(core_valid), .core_ready(core_ready), .core_addr(core_addr),
    .core_acquire(core_acquire), .bus_valid(bus_valid), .bus_ready(bus_ready),
    .bus_addr(bus_addr), .bus_acquire(bus_acquire), .bus_domain(bus_domain),
    .core_stalled(core_stalled),
    .mshr_valid(mshr_valid), .mshr_res_ok(mshr_res_ok), .mshr_read(mshr_read),
    .mshr_domain(mshr_domain), .mshr_addr(mshr_addr), .mshr_grant(mshr_grant),
    .mshr_throttled(mshr_throttled),
    .mem_valid(mem_valid), .mem_ready(mem_ready), .mem_addr(mem_addr),
    .mem_domain(mem_domain), .mem_read(mem_read), .mem_mshr(mem_mshr),
    .throttle(throttle), .period_end(period_end)
  );

  // ---------------- helpers ----------------
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  task automatic tag_write(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk);
    tag_mmio_req = '{valid: 1'b1, write: 1'b1, addr: a, wdata: d};
    @(negedge clk);
    tag_mmio_req = '0;
  endtask

  task automatic reg_write(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk);
    reg_mmio_req = '{valid: 1'b1, write: 1'b1, addr: a, wdata: d};
    @(negedge clk);
    reg_mmio_req = '0;
  endtask

  function automatic int core_dom(input int c);
    return (c == 0) ? 0 : 1;
  endfunction

  function automatic int mshr_dom(input int i);
    return (i % 4 == 0) ? 0 : 1;
  endfunction

  bit single_bank;   // SB phase: best-effort traffic to bank 3 only

  function automatic logic [31:0] new_addr(input int dom);
    logic [31:0] a;
    a = $urandom;
    if (dom == 1 && single_bank) a[11:9] = 3'd3;
    return a;
  endfunction

  // ---------------- behavioural cache-bank MSHRs ----------------
  int rearm [NL][NM];
  bit running;

  always @(posedge clk) begin
    if (running) begin
      for (int l = 0; l < NL; l++) begin
        for (int i = 0; i < NM; i++) begin
          if (mshr_grant[l][i]) begin
            mshr_valid[l][i] <= 1'b0;
            rearm[l][i] = $urandom % 6;
          end else if (!mshr_valid[l][i]) begin
            if (rearm[l][i] == 0) begin
              mshr_valid[l][i] <= 1'b1;
              mshr_addr[l][i]  <= new_addr(mshr_dom(i));
              mshr_read[l][i]  <= ($urandom % 8) != 0;
            end else begin
              rearm[l][i]--;
            end
          end
          mshr_res_ok[l][i] <= ($urandom % 10) != 0;
        end
        mem_ready[l] <= ($urandom % 8) != 0;
      end
      for (int c = 0; c < NC; c++) begin
        core_valid[c]   <= ($urandom % 2) != 0;
        core_acquire[c] <= ($urandom % 4) != 0;
        core_addr[c]    <= new_addr(core_dom(c));
        bus_ready[c]    <= ($urandom % 4) != 0;
      end
    end
  end

  // ---------------- monitors ----------------
  int win_cnt [NB];           // best-effort reads of the current window
  int be_total, rt_reads;
  int n_mshr_thr, n_core_stall, n_replenish, n_bank_indep, n_rt_during_thr, n_wr_thr;
  logic [ND-1:0][NB-1:0] thr_prev;
  bit measuring;

  always @(negedge clk) begin
    if (running) begin
      #1;
      for (int l = 0; l < NL; l++) begin
        for (int i = 0; i < NM; i++) begin
          if (mshr_throttled[l][i]) n_mshr_thr++;
          check(!(mshr_throttled[l][i] && mshr_dom(i) == 0), "real-time MSHR throttled");
          check(!(mshr_throttled[l][i] && !mshr_read[l][i]), "write throttled");
          check(mshr_throttled[l][i] == (mshr_valid[l][i] && mshr_read[l][i] &&
                throttle[mshr_domain[l][i]][mshr_addr[l][i][11:9]]), "MSHR throttle flag");
        end
        if (mem_valid[l] && mem_ready[l]) begin
          int bk;
          bk = mem_addr[l][11:9];
          if (mem_read[l] && mem_domain[l] == 1) begin
            win_cnt[bk]++;
            be_total += measuring;
            if (throttle[1] != '0 && !throttle[1][bk]) n_bank_indep++;
          end
          if (mem_read[l] && mem_domain[l] == 0) begin
            rt_reads++;
            if (throttle[1] != '0) n_rt_during_thr++;
          end
          if (!mem_read[l] && throttle[mem_domain[l]][bk]) n_wr_thr++;
        end
      end
      for (int c = 0; c < NC; c++) begin
        bit thr;
        thr = throttle[core_dom(c)][core_addr[c][11:9]];
        check(bus_domain[c] == core_dom(c), "core domain tag");
        check(core_stalled[c] == (core_valid[c] && core_acquire[c] && thr), "core stall");
        check(bus_valid[c] == (core_valid[c] && !core_stalled[c]), "bus valid");
        n_core_stall += core_stalled[c];
      end
      // window boundary: a read in the period's last cycle belongs to the next window
      if (period_end) begin
        for (int b = 0; b < NB; b++) begin
          int last;
          last = (mem_valid[0] && mem_ready[0] && mem_read[0] && mem_domain[0] == 1 && mem_addr[0][11:9] == b) +
                 (mem_valid[1] && mem_ready[1] && mem_read[1] && mem_domain[1] == 1 && mem_addr[1][11:9] == b);
          if (measuring) begin
            check(win_cnt[b] - last <= B + NL - 1,
                  $sformatf("bank %0d: %0d best-effort reads in a period, budget %0d", b, win_cnt[b] - last, B));
            if (single_bank && b == 3)
              check(win_cnt[b] - last >= B, $sformatf("saturated bank got %0d < %0d", win_cnt[b] - last, B));
          end
          win_cnt[b] = last;
        end
      end
      // replenishment: a throttle bit set at a boundary clears right after
      thr_prev = throttle;
    end
  end

  always @(posedge clk) begin
    if (running && $past(period_end) && ($past(throttle[1]) & ~throttle[1]) != '0) n_replenish++;
  end

  // ---------------- stimulus ----------------
  initial begin
    int sb_total, ab_total;
    rst_n = 1'b0;
    running = 1'b0; measuring = 1'b0; single_bank = 1'b1;
    tag_mmio_req = '0; reg_mmio_req = '0;
    core_valid = '0; core_addr = '0; core_acquire = '0; bus_ready = '0;
    mem_ready = '0; mshr_valid = '0; mshr_res_ok = '0; mshr_read = '0; mshr_addr = '0;
    for (int l = 0; l < NL; l++) for (int i = 0; i < NM; i++) begin
      mshr_domain[l][i] = 1'(mshr_dom(i));
      rearm[l][i] = 0;
    end
    be_total = 0; rt_reads = 0; n_mshr_thr = 0; n_core_stall = 0; n_replenish = 0;
    n_bank_indep = 0; n_rt_during_thr = 0; n_wr_thr = 0;
    foreach (win_cnt[b]) win_cnt[b] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    for (int c = 0; c < NC; c++) tag_write(REG_CORE_DOMAIN + 12'(4 * c), core_dom(c));
    reg_write(REG_BUDGET + 12'd4, B);
    reg_write(REG_ENABLE, 32'h2);       // regulate best-effort only
    reg_write(REG_PERIOD, P);           // restarts the period

    // SB phase
    @(negedge clk);
    running = 1'b1;
    repeat (2) @(posedge period_end);   // settle
    measuring = 1'b1;
    repeat (PERIODS_PER_PHASE) @(posedge period_end);
    @(negedge clk);
    sb_total = be_total;
    measuring = 1'b0;

    // AB phase
    single_bank = 1'b0;
    repeat (2) @(posedge period_end);
    be_total = 0;
    measuring = 1'b1;
    repeat (PERIODS_PER_PHASE) @(posedge period_end);
    @(negedge clk);
    ab_total = be_total;
    measuring = 1'b0;
    running = 1'b0;

    $display("best-effort reads per period: single bank %0.2f, all banks %0.2f, ratio %0.2f",
             real'(sb_total) / PERIODS_PER_PHASE, real'(ab_total) / PERIODS_PER_PHASE,
             real'(ab_total) / real'(sb_total > 0 ? sb_total : 1));
    check(ab_total >= 5 * sb_total, "per-bank budget scales with banks");
    check(rt_reads > 0, "real-time reads served");
    $display("mechanisms: mshr_throttled=%0d core_stall=%0d replenish=%0d bank_independent=%0d rt_during_throttle=%0d write_to_throttled=%0d",
             n_mshr_thr, n_core_stall, n_replenish, n_bank_indep, n_rt_during_thr, n_wr_thr);
    check(n_mshr_thr > 0, "MSHR throttling happened");
    check(n_core_stall > 0, "tagging-unit stall happened");
    check(n_replenish > 0, "budget replenishment happened");
    check(n_bank_indep > 0, "per-bank independence happened");
    check(n_rt_during_thr > 0, "real-time read during best-effort throttle happened");
    check(n_wr_thr > 0, "write to a throttled pair happened");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
