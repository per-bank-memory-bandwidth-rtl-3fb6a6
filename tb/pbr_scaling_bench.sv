// pbr_scaling_bench -- one regulation fabric driven with the evaluated
// regulator setting, for use by pbr_paper_config_tb.
//
// The fabric has 2^NBITS DRAM banks, mapped by the masks FN (bank bits start
// at address bit 9). The regulator is programmed as in the evaluation:
// period 1 ms at a 1 GHz cache clock = 1,000,000 cycles, and a best-effort
// budget of 53 MB/s per bank, i.e. 53e6 B/s * 1e-3 s / 64 B = 828
// cache-line reads per bank per period (828 * 64 B / 1 ms = 52.99 MB/s).
// Core 0 and every fourth MSHR are real-time and unregulated.
//
// Best-effort misses are spread over k = 1, 2, 4, ... 2^NBITS banks in turn
// and each setting is measured over one full period. Checked: no bank gets
// more than 828 (+1 for same-cycle issue from the two cache banks)
// best-effort reads in a period; each of the k banks gets at least 90% of
// 828 and all k together at least 95% of k x 828, so the best-effort
// bandwidth scales as k x 53 MB/s; real-time reads keep flowing. A bank can
// fall a little short of its budget because the 40 best-effort MSHRs can all
// end up waiting on banks already throttled.
//
// Runs its own clock; raises 'done' when finished and reports its check and
// failure counts.
module pbr_scaling_bench #(
  parameter int NBITS = 3,
  parameter logic [NBITS-1:0][31:0] FN = pbr_pkg::DEFAULT_BANK_FN
) (
  output logic done,
  output int   checks,
  output int   failures
);
  import pbr_pkg::*;

  localparam int NC = 4, ND = 2, NL = 2, NM = 27, NB = 1 << NBITS;
  localparam int P = 1_000_000;
  localparam int NACC = 828;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;


  mmio_req_t tag_mmio_req, reg_mmio_req;
  mmio_rsp_t tag_mmio_rsp, reg_mmio_rsp;
  logic [NC-1:0]            core_valid, core_ready, core_acquire, bus_valid, bus_acquire, core_stalled;
  logic [NC-1:0]            bus_ready;
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

  pbr_soc_top #(.N_BANK_BITS(NBITS), .BANK_FN(FN)) dut (
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

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  task automatic reg_write(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk);
    reg_mmio_req = '{valid: 1'b1, write: 1'b1, addr: a, wdata: d};
    @(negedge clk);
    reg_mmio_req = '0;
  endtask

  task automatic tag_write(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk);
    tag_mmio_req = '{valid: 1'b1, write: 1'b1, addr: a, wdata: d};
    @(negedge clk);
    tag_mmio_req = '0;
  endtask

  int k_banks;   // best-effort misses go to banks 0 .. k_banks-1
  bit running;

  function automatic logic [31:0] new_addr(input int dom);
    logic [31:0] a;
    a = $urandom;
    if (dom == 1) a[9 +: NBITS] = NBITS'($urandom % k_banks);
    return a;
  endfunction

  // behavioural cache-bank MSHRs: every fourth real-time, all reads,
  // re-armed one cycle after being granted, resources always free
  always @(posedge clk) begin
    if (running) begin
      for (int l = 0; l < NL; l++) begin
        for (int i = 0; i < NM; i++) begin
          if (mshr_grant[l][i] || !mshr_valid[l][i]) begin
            mshr_valid[l][i] <= !mshr_grant[l][i];
            if (mshr_grant[l][i]) mshr_addr[l][i] <= new_addr(i % 4 == 0 ? 0 : 1);
          end
        end
      end
    end
  end

  int win [NB];
  int rt_reads;

  always @(negedge clk) begin
    if (running) begin
      for (int l = 0; l < NL; l++)
        if (mem_valid[l] && mem_ready[l] && mem_read[l]) begin
          if (mem_domain[l] == 1) win[mem_addr[l][9 +: NBITS]]++;
          else rt_reads++;
        end
    end
  end

  initial begin
    int base_total;
    checks = 0; failures = 0; done = 1'b0;
    rst_n = 1'b0;
    running = 1'b0;
    k_banks = 1;
    tag_mmio_req = '0; reg_mmio_req = '0;
    core_valid = '0; core_addr = '0; core_acquire = '0; bus_ready = '1;
    mem_ready = '1; mshr_valid = '0; mshr_res_ok = '1; mshr_read = '1;
    for (int l = 0; l < NL; l++) for (int i = 0; i < NM; i++) begin
      mshr_domain[l][i] = (i % 4 == 0) ? 1'b0 : 1'b1;
      mshr_addr[l][i] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    for (int c = 1; c < NC; c++) tag_write(REG_CORE_DOMAIN + 12'(4 * c), 1);
    reg_write(REG_BUDGET + 12'd4, NACC);
    reg_write(REG_ENABLE, 32'h2);
    reg_write(REG_PERIOD, P);

    base_total = 0;
    for (int k = 1; k <= NB; k *= 2) begin
      int total;
      k_banks = k;
      running = 1'b1;
      // one period to let the new address pattern in, one measured period
      @(posedge period_end);
      @(negedge clk);
      foreach (win[b]) win[b] = 0;
      rt_reads = 0;
      @(posedge period_end);
      @(negedge clk);
      total = 0;
      for (int b = 0; b < NB; b++) begin
        total += win[b];
        check(win[b] <= NACC + NL - 1, $sformatf("k=%0d bank %0d: %0d reads > budget", k, b, win[b]));
        if (b < k) check(win[b] >= NACC * 9 / 10, $sformatf("k=%0d bank %0d: only %0d reads", k, b, win[b]));
        else       check(win[b] == 0, "no best-effort traffic outside the k banks");
      end
      if (k == 1) base_total = total;
      $display("%0d-bank DRAM, traffic on k=%0d banks: %0d best-effort reads per 1 ms = %0.1f MB/s, speedup %0.2f, real-time reads %0d",
               NB, k, total, real'(total) * 64.0 / 1.0e3, real'(total) / real'(base_total), rt_reads);
      check(total >= k * NACC * 95 / 100, "best-effort bandwidth scales with the number of banks");
      check(rt_reads > 100_000, "real-time reads unthrottled");
    end

    done = 1'b1;
  end
endmodule
