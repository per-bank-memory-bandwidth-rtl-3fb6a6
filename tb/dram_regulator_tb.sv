// dram_regulator_tb -- checks the per-domain, per-bank regulator.
//
// 1. Registers are written and read back over MMIO.
// 2. Random phase: both cache-bank ports fire random reads and writes of
//    random domains and addresses. A cycle-level reference model (period
//    timer, counters, "count >= budget" throttle with per-domain enable)
//    predicts throttle and period_end every cycle; the counters are also
//    read back over MMIO and compared.
// 3. Rate phase: a requester that obeys the throttle keeps reading one bank
//    for one domain. It must get exactly N_acc reads in every period of P
//    cycles, i.e. N_acc/P lines per cycle, and period_end must pulse every P
//    cycles. A second bank of the same domain, read at the same time, gets
//    its own N_acc (per-bank budgets).
// 4. With regulation disabled for a domain, its throttle bits stay low.
module dram_regulator_tb;
  import pbr_pkg::*;

  localparam int ND = 2;
  localparam int NL = 2;
  localparam int NB = 8;
  localparam int P  = 50;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  int checks = 0, failures = 0;

  mmio_req_t               mmio_req;
  mmio_rsp_t               mmio_rsp;
  logic [NL-1:0]           mem_fire, mem_read;
  logic [NL-1:0][0:0]      mem_domain;
  logic [NL-1:0][31:0]     mem_addr;
  logic [ND-1:0][NB-1:0]   throttle;
  logic                    period_end;

  dram_regulator dut (
    .clk(clk), .rst_n(rst_n), .mmio_req(mmio_req), .mmio_rsp(mmio_rsp),
    .mem_fire(mem_fire), .mem_read(mem_read), .mem_domain(mem_domain),
    .mem_addr(mem_addr), .throttle(throttle), .period_end(period_end)
  );

  // ---------------- reference model ----------------
  int m_timer;
  int m_cnt [ND][NB];
  int m_budget [ND];
  bit m_enable [ND];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  task automatic mmio_write(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk);
    mmio_req = '{valid: 1'b1, write: 1'b1, addr: a, wdata: d};
    @(negedge clk);
    mmio_req = '0;
  endtask

  task automatic mmio_read(input logic [11:0] a, output logic [31:0] d);
    @(negedge clk);
    mmio_req = '{valid: 1'b1, write: 1'b0, addr: a, wdata: '0};
    @(negedge clk);
    mmio_req = '0;
    check(mmio_rsp.rvalid, "rvalid one cycle after read");
    d = mmio_rsp.rdata;
  endtask

  function automatic logic [NB-1:0] m_thr(input int d);
    logic [NB-1:0] t;
    for (int b = 0; b < NB; b++) t[b] = m_enable[d] && (m_cnt[d][b] >= m_budget[d]);
    return t;
  endfunction

  // called between negedge and posedge with the cycle's inputs applied
  task automatic model_cycle();
    bit pe;
    pe = (m_timer >= P - 1);
    for (int d = 0; d < ND; d++) check(throttle[d] == m_thr(d), $sformatf("throttle[%0d]", d));
    check(period_end == pe, "period_end");
    if (pe) begin
      m_timer = 0;
      foreach (m_cnt[d, b]) m_cnt[d][b] = 0;
    end else begin
      m_timer++;
    end
    // a read in a period's last cycle is charged to the next period
    for (int l = 0; l < NL; l++)
      if (mem_fire[l] && mem_read[l])
        m_cnt[mem_domain[l]][mem_addr[l][11:9]]++;
  endtask

  initial begin
    logic [31:0] rd;
    int got0, got1, periods, pe_gap, last_pe;
    rst_n = 1'b0;
    mmio_req = '0; mem_fire = '0; mem_read = '0; mem_domain = '0; mem_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // reset values
    mmio_read(REG_PERIOD, rd); check(rd == 32'd1_000_000, "reset period");
    mmio_read(REG_ENABLE, rd); check(rd == 32'd0, "reset enable");

    // configure: budgets 3 and 5, both domains regulated, period last
    m_budget[0] = 3; m_budget[1] = 5; m_enable[0] = 1; m_enable[1] = 1;
    mmio_write(REG_ENABLE, 32'h3);
    mmio_write(REG_BUDGET + 12'd0, 32'd3);
    mmio_write(REG_BUDGET + 12'd4, 32'd5);
    mmio_write(REG_PERIOD, P);
    mmio_read(REG_BUDGET + 12'd4, rd); check(rd == 32'd5, "budget 1 read back");
    mmio_read(REG_PERIOD, rd);         check(rd == P, "period read back");
    mmio_read(REG_ENABLE, rd);         check(rd == 32'h3, "enable read back");
    // align the model with the first period boundary (no traffic so far)
    @(negedge clk);
    while (!period_end) @(negedge clk);
    m_timer = P - 1;
    foreach (m_cnt[d, b]) m_cnt[d][b] = 0;
    #1 model_cycle();

    // ---------------- random phase ----------------
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      for (int l = 0; l < NL; l++) begin
        mem_fire[l]   = ($urandom % 3) == 0;
        mem_read[l]   = ($urandom % 4) != 0;
        mem_domain[l] = 1'($urandom);
        mem_addr[l]   = $urandom & 32'h0000_0e00 | ($urandom & 32'hffff_f000);
      end
      #1 model_cycle();
    end
    @(negedge clk);
    mem_fire = '0;
    #1 model_cycle();

    // counters over MMIO (no traffic now; the timer keeps running)
    for (int b = 0; b < NB; b++) begin
      int exp_c;
      exp_c = m_cnt[1][b];
      @(negedge clk);
      mmio_req = '{valid: 1'b1, write: 1'b0, addr: REG_COUNT + 12'(4 * (NB + b)), wdata: '0};
      #1 model_cycle();
      @(negedge clk);
      mmio_req = '0;
      check(mmio_rsp.rvalid && mmio_rsp.rdata == exp_c,
            $sformatf("count[1][%0d] = %0d expected %0d", b, mmio_rsp.rdata, exp_c));
      #1 model_cycle();
    end

    // ---------------- rate phase ----------------
    // wait for a period boundary
    @(negedge clk);
    while (!period_end) begin #1 model_cycle(); @(negedge clk); end
    #1 model_cycle();
    got0 = 0; got1 = 0; periods = 0; last_pe = 0;
    for (int n = 0; n < 6 * P; n++) begin
      @(negedge clk);
      mem_fire[0] = !throttle[1][2]; mem_read[0] = 1'b1; mem_domain[0] = 1'b1;
      mem_addr[0] = 32'h0000_0400;   // bank 2
      mem_fire[1] = !throttle[1][5]; mem_read[1] = 1'b1; mem_domain[1] = 1'b1;
      mem_addr[1] = 32'h0000_0a00;   // bank 5
      got0 += mem_fire[0];
      got1 += mem_fire[1];
      if (period_end) begin
        periods++;
        check(got0 == 5 && got1 == 5,
              $sformatf("period %0d: %0d and %0d reads, budget 5 per bank", periods, got0, got1));
        if (periods > 1) check(n - last_pe == P, $sformatf("period length %0d", n - last_pe));
        last_pe = n;
        got0 = 0; got1 = 0;
      end
      #1 model_cycle();
    end
    check(periods == 6, $sformatf("%0d periods in %0d cycles", periods, 6 * P));

    // ---------------- disable domain 1 ----------------
    @(negedge clk);
    mem_fire = '0;
    #1 model_cycle();
    @(negedge clk);
    mmio_req = '{valid: 1'b1, write: 1'b1, addr: REG_ENABLE, wdata: 32'h1};
    #1 model_cycle();
    m_enable[1] = 0;
    for (int n = 0; n < 2 * P; n++) begin
      @(negedge clk);
      mmio_req = '0;
      mem_fire = '1; mem_read = '1; mem_domain = '{1'b1, 1'b1};
      mem_addr = '{32'h0000_0400, 32'h0000_0400};
      #1 model_cycle();
      check(throttle[1] == '0, "disabled domain never throttled");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
