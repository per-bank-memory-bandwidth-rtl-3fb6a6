// pbr_paper_config_tb -- the regulation fabric at the evaluated regulator
// setting (1 ms period at 1 GHz, 53 MB/s = 828 lines per bank per period).
//
// Two fabrics run side by side, each in a pbr_scaling_bench:
//   * the default 8-bank DRAM (address bits 9, 10, 11), with best-effort
//     traffic over 1, 2, 4 and 8 banks (the bank-scaling experiment);
//   * a 16-bank DRAM, the larger configuration evaluated for cost, with a
//     fourth bank bit taken from address bit 12 (this bit is an assumption),
//     with best-effort traffic over 1, 2, 4, 8 and 16 banks.
// Both must reach about k x 53 MB/s with traffic on k banks while no bank
// exceeds its budget.
module pbr_paper_config_tb;

  localparam logic [3:0][31:0] FN16 = '{32'h0000_1000, 32'h0000_0800, 32'h0000_0400, 32'h0000_0200};

  logic done8, done16;
  int   checks8, failures8, checks16, failures16;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  pbr_scaling_bench u_8bank (.done(done8), .checks(checks8), .failures(failures8));
  pbr_scaling_bench #(.NBITS(4), .FN(FN16)) u_16bank (.done(done16), .checks(checks16), .failures(failures16));

  initial begin
    wait (done8 === 1'b1 && done16 === 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks8 + checks16, failures8 + failures16);
    $finish;
  end

  initial begin
    repeat (12_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks8 + checks16, failures8 + failures16 + 1);
    $finish;
  end
endmodule
