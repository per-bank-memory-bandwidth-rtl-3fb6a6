// bank_map -- physical address to DRAM bank index.
//
// Bank bit i is the parity (XOR) of the address bits selected by mask
// BANK_FN[i]. This is the hardware form of the address-to-bank conversion
// the paper describes for its benchmarks, and it covers both the direct maps
// (one bit per mask, as in the evaluated DDR3 with bits 9, 10, 11) and the
// XOR maps the paper reverse-engineered on commercial parts. Using this
// function inside the regulator, to attribute requests to bank counters, is
// this design's choice: the paper does not say how the regulator finds the
// bank of a request.
//
// Purely combinational, no clock.
module bank_map #(
  parameter int unsigned ADDR_W      = pbr_pkg::ADDR_W,
  parameter int unsigned N_BANK_BITS = pbr_pkg::N_BANK_BITS,
  parameter logic [N_BANK_BITS-1:0][ADDR_W-1:0] BANK_FN = pbr_pkg::DEFAULT_BANK_FN
) (
  input  logic [ADDR_W-1:0]      addr,
  output logic [N_BANK_BITS-1:0] bank
);

  always_comb begin
    for (int i = 0; i < N_BANK_BITS; i++) begin
      bank[i] = ^(addr & BANK_FN[i]);
    end
  end

endmodule
