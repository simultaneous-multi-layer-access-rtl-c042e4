// cio_clk_counter: the per-layer clock counter of Cascaded-IO.
//
// Each layer receives its clock from the layer below and passes a clock on to
// the layer above. The counter counts the cycles of the incoming clock; when
// div_en is set, the clock passed upward has half the incoming frequency,
// otherwise it is passed through unchanged. The count value is also what the
// layer's multiplexer control decodes (own data when the count matches the
// layer's slot, e.g. 2'b00 in the bottom layer).
//
// Clocks are modelled as clock enables on the single IO clock `clk`:
// tick_in marks a rising edge of the incoming layer clock, tick_out a rising
// edge of the clock handed upward. With div_en set, tick_out is raised on the
// incoming ticks at which the count is even, so the upper clock ticks every
// second incoming tick. The counter advances on each incoming tick and resets
// to zero, so all layers start phase-aligned at the start of a frame.
//
// Follows the paper: one counter per layer, width two bits for four layers,
// divide-by-two when enabled. Own choices: the clock-enable representation,
// the even-count phase of the divided clock and the asynchronous reset.
module cio_clk_counter #(
  parameter int unsigned CW = 2   // counter width, log2(number of layers)
) (
  input  logic          clk,      // IO clock
  input  logic          rst_n,    // asynchronous active-low reset
  input  logic          tick_in,  // edge of the clock arriving from below
  input  logic          div_en,   // halve the clock passed upward
  output logic [CW-1:0] cnt,      // cycles of the incoming clock, modulo 2**CW
  output logic          tick_out  // edge of the clock passed upward
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       cnt <= '0;
    else if (tick_in) cnt <= cnt + 1'b1;
  end

  assign tick_out = tick_in & (~div_en | ~cnt[0]);

endmodule
