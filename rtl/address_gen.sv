// address_gen: synapse index counter of one layer.
//
// The counter produces the index i that selects input x_i from the input
// buffer and weight W_ij of every neuron j from the weight memory, as in the
// "Address" box of the layer block diagram. `clr` returns it to 0; each cycle
// with `en` high advances it by one. `last` is high while i = N-1, so the
// controller can end the dot product. i wraps to 0 after N-1. The counter is
// registered: a change of `clr`/`en` shows on `addr` in the next cycle.
// The counter itself is implied by the published diagram; its clear/enable
// interface is this design's choice.
module address_gen #(
  parameter int unsigned N      = 1800,
  localparam int unsigned AW    = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          en,
  output logic [AW-1:0] addr,
  output logic          last
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                        addr <= '0;
    else if (clr)                      addr <= '0;
    else if (en && addr == AW'(N - 1)) addr <= '0;
    else if (en)                       addr <= addr + 1'b1;
  end

  assign last = (addr == AW'(N - 1));

endmodule
