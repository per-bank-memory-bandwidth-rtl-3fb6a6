// bank_map_tb -- checks the address-to-bank function.
//
// Two instances: the default direct map of the evaluated DDR3 (bank bits =
// address bits 9, 10, 11) and a 7-bit XOR map (the 128-bank desktop map
// b0 = 7^14, b1 = 15^20, b2 = 16^21, b3 = 17^22, b4 = 18^23, b5 = 19^24,
// b6 = 8^9^12^13^18^19). Random addresses are compared against a reference
// that walks lists of bit positions, as the software conversion does.
module bank_map_tb;
  import pbr_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic [31:0] addr;
  logic [2:0]  bank_d;
  logic [6:0]  bank_x;

  localparam logic [6:0][31:0] XOR_FN = '{
    32'h000C_3300,   // b6 : 8 9 12 13 18 19
    32'h0108_0000,   // b5 : 19 24
    32'h0084_0000,   // b4 : 18 23
    32'h0042_0000,   // b3 : 17 22
    32'h0021_0000,   // b2 : 16 21
    32'h0010_8000,   // b1 : 15 20
    32'h0000_4080    // b0 : 7 14
  };

  bank_map u_direct (.addr(addr), .bank(bank_d));
  bank_map #(.N_BANK_BITS(7), .BANK_FN(XOR_FN)) u_xor (.addr(addr), .bank(bank_x));

  function automatic logic [6:0] ref_xor(input logic [31:0] a);
    int fns [7][6] = '{'{7, 14, -1, -1, -1, -1}, '{15, 20, -1, -1, -1, -1},
                       '{16, 21, -1, -1, -1, -1}, '{17, 22, -1, -1, -1, -1},
                       '{18, 23, -1, -1, -1, -1}, '{19, 24, -1, -1, -1, -1},
                       '{8, 9, 12, 13, 18, 19}};
    logic [6:0] b = '0;
    for (int i = 0; i < 7; i++) begin
      logic r = 1'b0;
      for (int j = 0; j < 6; j++) if (fns[i][j] >= 0) r ^= a[fns[i][j]];
      if (r) b |= 7'(1 << i);
    end
    return b;
  endfunction

  initial begin
    for (int n = 0; n < 4000; n++) begin
      addr = (n < 8) ? 32'(n) << 9 : $urandom;
      @(posedge clk);
      checks++;
      if (bank_d !== {addr[11], addr[10], addr[9]}) begin
        failures++;
        $display("direct map: addr %h bank %0d", addr, bank_d);
      end
      checks++;
      if (bank_x !== ref_xor(addr)) begin
        failures++;
        $display("xor map: addr %h bank %h expected %h", addr, bank_x, ref_xor(addr));
      end
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
