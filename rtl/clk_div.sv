// clk_div: clock divider producing the Lorenz step rate as a clock enable.
//
// A modulo-DIV counter that raises `tick` for one cycle in every DIV enabled
// cycles, at count DIV-1. The transmitter uses DIV = 11 on clk_tx and the
// receiver DIV = 44 on clk_rx, so that both generators advance once per byte
// (6.25 MHz / 11 = 25 MHz / 44 = 568.2 kHz). `clr` restarts the count; the
// cycle on which clr is high counts as count 0, so the next tick follows DIV-1
// cycles later. A tick due on a clr cycle is still given. `en` low freezes the
// count and suppresses the tick.
//
// The paper draws these dividers as producing a separate clock (clk_lorenz);
// here they produce an enable for logic on the link clock, which gives the
// same step rate in one clock domain.
module clk_div #(
  parameter int unsigned DIV = 11
) (
  input  logic clk,
  input  logic rst,
  input  logic en,
  input  logic clr,
  output logic tick
);

  localparam int unsigned CW = (DIV > 1) ? $clog2(DIV) : 1;

  logic [CW-1:0] cnt;

  assign tick = en && (cnt == CW'(DIV - 1));

  always_ff @(posedge clk) begin
    if (rst)
      cnt <= '0;
    else if (clr)
      cnt <= CW'(1 % DIV);
    else if (en)
      cnt <= tick ? '0 : cnt + CW'(1);
  end

endmodule
