// rr_arbiter -- round-robin arbiter with a registered priority pointer.
//
// Among the requesting inputs, the first one at or after the pointer (in
// ascending index order, wrapping around) wins. The one-hot winner and its
// index are combinational outputs. When 'advance' is high in a cycle with a
// winner (the winner's transfer took place), the pointer moves to the input
// after the winner, so every requester is served within N grants.
// A synchronous, active-low reset puts the pointer at input 0.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [N-1:0]                   req,
  input  logic                           advance,
  output logic                           any,
  output logic [N-1:0]                   win,
  output logic [pbr_pkg::idx_w(N)-1:0]   win_idx
);

  localparam int unsigned IW = pbr_pkg::idx_w(N);

  logic [IW-1:0] ptr_q;

  always_comb begin
    logic found;
    found   = 1'b0;
    win     = '0;
    win_idx = '0;
    // two passes over the inputs: indices >= ptr first, then the rest
    for (int k = 0; k < 2 * N; k++) begin
      int unsigned i;
      i = (k < N) ? k : k - N;
      if (!found && req[i] && ((k >= N) || (i >= int'(ptr_q)))) begin
        found   = 1'b1;
        win[i]  = 1'b1;
        win_idx = IW'(i);
      end
    end
    any = found;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ptr_q <= '0;
    end else if (advance && any) begin
      ptr_q <= (int'(win_idx) == N - 1) ? '0 : win_idx + IW'(1);
    end
  end

`ifndef SYNTHESIS
  a_onehot : assert property (@(posedge clk) disable iff (!rst_n) $onehot0(win));
  a_any    : assert property (@(posedge clk) disable iff (!rst_n) any == (|req));
`endif

endmodule
