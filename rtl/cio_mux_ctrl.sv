// cio_mux_ctrl: multiplexer control of one Cascaded-IO layer.
//
// Decides, from the layer's clock-counter value, whether the layer's TSV
// multiplexers drive the layer's own data (sel_own = 1) or connect the data
// coming down from the layer above (sel_own = 0, the bypass path).
//
// Each frame of L IO cycles has one slot per layer, slot s carrying layer s on
// the bottom TSVs. A layer must drive its own data during a local clock cycle
// that covers its slot and must bypass in every later slot so that upper
// layers reach the bottom:
//   * full-rate layer (one IO cycle per local cycle): own when cnt == layer_id,
//     the bottom layer therefore drives its own data at count 2'b00;
//   * layer at 1/P of the IO rate (optimized clocks, P >= 2): it has N = L/P
//     local cycles per frame and, with the even-count phase of the clock
//     counters, its local cycle k covers slots kP+1 .. kP+P (mod L); it drives
//     own data in cycle k = ((layer_id+1) mod L) / P, i.e. when
//     cnt mod N == k. The top layer (P = L) always drives its own data.
// The layer's rate follows from its position (layer_id strap) and clk_mode,
// so every layer is the same circuit.
//
// Purely combinational; sel_own changes only when cnt does, i.e. on the
// layer's own clock edges. Follows the paper for the bottom layer rule
// (own at 2'b00, upper data otherwise); the slot formula for slower layers is
// this design's reading of the optimized-clock timing.
module cio_mux_ctrl
  import smla_pkg::*;
#(
  parameter int unsigned NL = smla_pkg::NUM_LAYERS,        // layers in the stack
  parameter int unsigned CW = (NL > 1) ? $clog2(NL) : 1    // counter width
) (
  input  logic [CW-1:0] cnt,       // clock-counter value of this layer
  input  logic [CW-1:0] layer_id,  // position in the stack, 0 = bottom
  input  clk_mode_e     clk_mode,  // identical or optimized clocks
  output logic          sel_own    // 1: drive own data, 0: bypass upper data
);

  int unsigned period;
  int unsigned n_local;
  int unsigned own_cycle;

  always_comb begin
    if (clk_mode == CLK_OPTIMIZED && opt_clock_supported(NL))
      period = layer_period(int'(layer_id), NL);
    else
      period = 1;
    n_local   = NL / period;
    own_cycle = ((int'(layer_id) + 1) % NL) / period;
    if (period == 1)
      sel_own = (cnt == layer_id);
    else
      sel_own = ((int'(cnt) & (n_local - 1)) == own_cycle);
  end

endmodule
