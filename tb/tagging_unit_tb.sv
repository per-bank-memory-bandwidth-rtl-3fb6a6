// tagging_unit_tb -- checks domain tagging and regulation forwarding.
//
// Cores are assigned to domains over MMIO (core 0 -> domain 0, cores 1-3 ->
// domain 1, the evaluated real-time / best-effort split) and the table is
// read back. Then requests, bus ready and throttle bits are randomised every
// cycle and a reference model predicts, per core, the domain tag, whether an
// AcquireBlock is held back (throttle bit of the core's domain and the bank
// in address bits 11:9) and the valid/ready seen on both sides. Non-acquire
// requests must never be stalled.
module tagging_unit_tb;
  import pbr_pkg::*;

  localparam int NC = 4;
  localparam int ND = 2;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  int checks = 0, failures = 0;

  mmio_req_t             mmio_req;
  mmio_rsp_t             mmio_rsp;
  logic [NC-1:0]         core_valid, core_ready, core_acquire, bus_valid, bus_ready, bus_acquire, stalled;
  logic [NC-1:0][31:0]   core_addr, bus_addr;
  logic [NC-1:0][0:0]    bus_domain;
  logic [ND-1:0][7:0]    throttle;

  tagging_unit dut (
    .clk(clk), .rst_n(rst_n), .mmio_req(mmio_req), .mmio_rsp(mmio_rsp),
    .core_valid(core_valid), .core_ready(core_ready), .core_addr(core_addr),
    .core_acquire(core_acquire), .bus_valid(bus_valid), .bus_ready(bus_ready),
    .bus_addr(bus_addr), .bus_acquire(bus_acquire), .bus_domain(bus_domain),
    .throttle(throttle), .stalled(stalled)
  );

  int dom [NC] = '{0, 1, 1, 1};

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
    check(mmio_rsp.rvalid, "rvalid");
    d = mmio_rsp.rdata;
  endtask

  initial begin
    logic [31:0] rd;
    int n_stall = 0, n_pass_thr = 0;
    rst_n = 1'b0;
    mmio_req = '0; core_valid = '0; core_addr = '0; core_acquire = '0;
    bus_ready = '0; throttle = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    for (int c = 0; c < NC; c++) begin
      mmio_read(REG_CORE_DOMAIN + 12'(4 * c), rd);
      check(rd == 0, "reset domain 0");
    end
    for (int c = 0; c < NC; c++) mmio_write(REG_CORE_DOMAIN + 12'(4 * c), dom[c]);
    for (int c = 0; c < NC; c++) begin
      mmio_read(REG_CORE_DOMAIN + 12'(4 * c), rd);
      check(rd == dom[c], $sformatf("core %0d domain read back %0d", c, rd));
    end

    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      core_valid   = 4'($urandom);
      core_acquire = 4'($urandom);
      bus_ready    = 4'($urandom);
      for (int c = 0; c < NC; c++) core_addr[c] = $urandom;
      for (int d = 0; d < ND; d++) throttle[d] = 8'($urandom);
      #1;
      for (int c = 0; c < NC; c++) begin
        bit thr, stl;
        thr = throttle[dom[c]][core_addr[c][11:9]];
        stl = core_valid[c] && core_acquire[c] && thr;
        n_stall += stl;
        n_pass_thr += (core_valid[c] && !core_acquire[c] && thr && bus_valid[c]);
        check(bus_domain[c] == dom[c], "domain tag");
        check(bus_addr[c] == core_addr[c] && bus_acquire[c] == core_acquire[c], "fields");
        check(stalled[c] == stl, $sformatf("core %0d stalled", c));
        check(bus_valid[c] == (core_valid[c] && !stl), $sformatf("core %0d bus_valid", c));
        check(core_ready[c] == (bus_ready[c] && !(core_acquire[c] && thr)),
              $sformatf("core %0d core_ready", c));
      end
    end
    check(n_stall > 0, "some AcquireBlock stalled");
    check(n_pass_thr > 0, "non-acquire requests pass a throttled pair");

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
