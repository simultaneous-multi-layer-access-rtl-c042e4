// smla_pkg: shared constants, types and helper functions of the Cascaded-IO
// 3D-stacked DRAM channel.
//
// The defaults describe the main configuration: four stacked layers, a
// 128-bit TSV data bus per channel, 64-byte requests and two banks per rank.
// One "IO cycle" is one period of the IO clock (F x L, 800 MHz for four
// layers at a 200 MHz baseline); one "frame" is L IO cycles, i.e. one period
// of the baseline clock F. Slot s of a frame carries the data of layer s on
// the bottom TSVs.
//
// Clocks of the layers are modelled as clock enables ("ticks") on the single
// IO clock: a layer whose clock runs at half the IO rate sees a tick every
// second IO cycle. layer_period() gives the number of IO cycles per local
// clock cycle of each layer under the optimized-clock rule (lower half of the
// layers at F x L, the next quarter at half that, ..., the top layer at F).
package smla_pkg;

  localparam int unsigned NUM_LAYERS = 4;    // layers per stack
  localparam int unsigned IO_WIDTH   = 128;  // TSV data bits per channel
  localparam int unsigned LINE_BITS  = 512;  // 64 bytes per request
  localparam int unsigned BANKS_PER_RANK = 2;    // banks per rank
  localparam int unsigned COL_BITS   = 6;    // column address bits (assumed)
  localparam int unsigned TAG_BITS   = 8;    // request tag bits (assumed)

  // Rank organization: Single-Layer Ranks (one rank per layer) or
  // Multi-Layer Rank (all layers form one rank and share each command).
  typedef enum logic {
    RANK_SLR = 1'b0,
    RANK_MLR = 1'b1
  } rank_org_e;

  // Clock scheme: every layer at the IO rate, or the power-of-two reduced
  // rates of the upper layers.
  typedef enum logic {
    CLK_IDENTICAL = 1'b0,
    CLK_OPTIMIZED = 1'b1
  } clk_mode_e;

  // IO cycles per local clock cycle of layer `id` in an `n`-layer stack with
  // optimized clocks. n is a power of two.
  function automatic int unsigned layer_period(int unsigned id, int unsigned n);
    int unsigned p;
    int unsigned bound;
    p     = 1;
    bound = n / 2;
    for (int unsigned k = 0; k < 8; k++) begin
      if (id >= bound && p < n) begin
        p     = p * 2;
        bound = bound + (n - bound) / 2;
      end
    end
    return p;
  endfunction

  // The optimized clock scheme is realised by chained divide-by-two clock
  // counters. In a zero-delay synchronous model the windows in which each
  // layer drives its own data can be placed for stacks of up to four layers;
  // larger stacks use identical clocks.
  function automatic bit opt_clock_supported(int unsigned n);
    return n <= 4;
  endfunction

endpackage
