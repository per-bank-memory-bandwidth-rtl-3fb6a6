// mshr_scheduler_tb -- checks the throttle-aware round-robin MSHR scheduler.
//
// Every cycle the MSHR request lines, the throttle bits and the memory ready
// are randomised. A reference model with its own round-robin pointer works
// out which MSHRs are schedulable (valid, resources free, and for reads the
// (domain, address bits 11:9) throttle bit clear) and which one must win.
// The test compares the offered request, the grant vector and the throttled
// flags, and checks that a saturated, unthrottled scheduler grants one
// request per cycle and visits every MSHR within N grants.
module mshr_scheduler_tb;
  import pbr_pkg::*;

  localparam int N  = 27;
  localparam int ND = 2;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  int checks = 0, failures = 0;

  logic [N-1:0]              mshr_valid, mshr_res_ok, mshr_read, mshr_grant, mshr_throttled;
  logic [N-1:0][0:0]         mshr_domain;
  logic [N-1:0][31:0]        mshr_addr;
  logic [ND-1:0][7:0]        throttle;
  logic                      mem_valid, mem_ready, mem_read;
  logic [31:0]               mem_addr;
  logic [0:0]                mem_domain;
  logic [4:0]                mem_mshr;

  mshr_scheduler dut (
    .clk(clk), .rst_n(rst_n),
    .mshr_valid(mshr_valid), .mshr_res_ok(mshr_res_ok), .mshr_read(mshr_read),
    .mshr_domain(mshr_domain), .mshr_addr(mshr_addr),
    .mshr_grant(mshr_grant), .mshr_throttled(mshr_throttled),
    .throttle(throttle),
    .mem_valid(mem_valid), .mem_ready(mem_ready), .mem_addr(mem_addr),
    .mem_domain(mem_domain), .mem_read(mem_read), .mem_mshr(mem_mshr)
  );

  int ref_ptr;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  task automatic compare();
    logic [N-1:0] thr, sch;
    int exp_w;
    for (int i = 0; i < N; i++) begin
      thr[i] = mshr_valid[i] && mshr_read[i] &&
               throttle[mshr_domain[i]][{mshr_addr[i][11], mshr_addr[i][10], mshr_addr[i][9]}];
      sch[i] = mshr_valid[i] && mshr_res_ok[i] && !thr[i];
    end
    exp_w = -1;
    for (int k = 0; k < N; k++) begin
      int i = (ref_ptr + k) % N;
      if (exp_w < 0 && sch[i]) exp_w = i;
    end
    check(mshr_throttled == thr, "throttled flags");
    check(mem_valid == (exp_w >= 0), "mem_valid");
    if (exp_w >= 0) begin
      check(int'(mem_mshr) == exp_w, $sformatf("winner %0d expected %0d", mem_mshr, exp_w));
      check(mem_addr == mshr_addr[exp_w] && mem_read == mshr_read[exp_w] &&
            mem_domain == mshr_domain[exp_w], "request fields");
      check(mshr_grant == (mem_ready ? (N)'(1) << exp_w : '0), "grant vector");
      if (mem_ready) ref_ptr = (exp_w + 1) % N;
    end else begin
      check(mshr_grant == '0, "no grant without winner");
    end
  endtask

  initial begin
    int grants;
    logic [N-1:0] seen;
    rst_n = 1'b0;
    mshr_valid = '0; mshr_res_ok = '0; mshr_read = '0; mshr_domain = '0;
    mshr_addr = '0; throttle = '0; mem_ready = 1'b0;
    ref_ptr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // random phase
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        mshr_valid[i]  = ($urandom % 3) != 0;
        mshr_res_ok[i] = ($urandom % 4) != 0;
        mshr_read[i]   = ($urandom % 4) != 0;
        mshr_domain[i] = 1'($urandom);
        mshr_addr[i]   = $urandom;
      end
      for (int d = 0; d < ND; d++) throttle[d] = 8'($urandom) & 8'($urandom);
      mem_ready = ($urandom % 4) != 0;
      #1 compare();
    end

    // saturated, unthrottled: one grant per cycle, every MSHR within N grants
    @(negedge clk);
    mshr_valid = '1; mshr_res_ok = '1; throttle = '0; mem_ready = 1'b1;
    grants = 0; seen = '0;
    for (int n = 0; n < N; n++) begin
      #1 compare();
      grants += (mshr_grant != '0);
      seen |= mshr_grant;
      @(negedge clk);
    end
    check(grants == N, $sformatf("saturated grants %0d in %0d cycles", grants, N));
    check(seen == '1, "every MSHR served within N grants");

    // one (domain, bank) throttled: its reads are skipped, the rest proceed
    for (int i = 0; i < N; i++) begin
      mshr_domain[i] = 1'(i % 2);
      mshr_addr[i]   = 32'((i % 8) << 9);
      mshr_read[i]   = 1'b1;
    end
    throttle = '0; throttle[1][3] = 1'b1;
    seen = '0;
    for (int n = 0; n < 3 * N; n++) begin
      #1 compare();
      seen |= mshr_grant;
      @(negedge clk);
    end
    for (int i = 0; i < N; i++)
      check(seen[i] == !((i % 2 == 1) && (i % 8 == 3)), $sformatf("mshr %0d service", i));

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
