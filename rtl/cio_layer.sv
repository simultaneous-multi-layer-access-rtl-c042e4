// cio_layer: Cascaded-IO interface of one DRAM layer.
//
// Every layer of the stack is this same circuit; only the layer_id strap
// (its position, 0 = bottom) differs. It contains the three parts the
// Cascaded-IO scheme adds to a DRAM die plus the read sequencer:
//   * cio_clk_counter - counts the clock arriving from below and passes it,
//     halved when needed, to the layer above;
//   * cio_mux_ctrl    - turns the count into the own/bypass select;
//   * cio_data_mux    - one multiplexer per TSV, own data synchronised once
//     per frame, upper data bypassed;
//   * cio_read_ctrl   - decides whether this layer serves a read (SLR or MLR)
//     and fetches its words from the global sense amplifiers.
//
// Clock path: tick_in is the edge of the clock arriving from the layer below
// (every IO cycle for the bottom layer), tick_out is handed to the layer above.
// With optimized clocks the layer halves its outgoing clock when the layer
// above has twice its own period (layer_period() in smla_pkg); with identical
// clocks it never divides. frame_tick, the last IO cycle of a frame, is the
// in-DRAM (baseline) clock that times commands and global sense amplifier
// reads; it is generated below the stack and shared by all layers.
//
// Data path: up_data is the TSV segment from the layer above, down_data the
// segment toward the layer below. gsa_* is the layer's port to its own
// DRAM core (cell array, row buffer and global sense amplifiers), which lies
// outside this logic.
module cio_layer
  import smla_pkg::*;
#(
  parameter int unsigned NL    = smla_pkg::NUM_LAYERS,
  parameter int unsigned W     = smla_pkg::IO_WIDTH,
  parameter int unsigned LINE  = smla_pkg::LINE_BITS,
  parameter int unsigned BANKS = smla_pkg::BANKS_PER_RANK,
  parameter int unsigned COL_W = smla_pkg::COL_BITS,
  parameter int unsigned CW    = (NL > 1) ? $clog2(NL) : 1,
  parameter int unsigned BKW   = (BANKS > 1) ? $clog2(BANKS) : 1,
  parameter int unsigned BTW   = (LINE / W > 1) ? $clog2(LINE / W) : 1
) (
  input  logic             clk,         // IO clock
  input  logic             rst_n,
  input  logic [CW-1:0]    layer_id,    // stack position strap
  input  clk_mode_e        clk_mode,
  input  rank_org_e        rank_org,
  // clock path
  input  logic             tick_in,     // clock edge from the layer below
  output logic             tick_out,    // clock edge to the layer above
  input  logic             frame_tick,  // baseline-clock edge (end of frame)
  output logic [CW-1:0]    cnt,         // clock-counter value
  // commands (shared by all layers)
  input  logic             cmd_valid,
  input  logic [CW-1:0]    cmd_rank,
  input  logic [BKW-1:0]   cmd_bank,
  input  logic [COL_W-1:0] cmd_col,
  // global sense amplifier port of this layer
  output logic             gsa_rd_en,
  output logic [BKW-1:0]   gsa_bank,
  output logic [COL_W-1:0] gsa_col,
  output logic [BTW-1:0]   gsa_beat,
  input  logic [W-1:0]     gsa_data,    // word for the address above, same frame
  // TSV data path
  input  logic [W-1:0]     up_data,
  output logic [W-1:0]     down_data,
  // observation
  output logic             sel_own,
  output logic             own_valid,
  output logic             busy
);

  logic div_en;

  always_comb begin
    div_en = 1'b0;
    if (clk_mode == CLK_OPTIMIZED && opt_clock_supported(NL) && int'(layer_id) < NL - 1)
      div_en = layer_period(int'(layer_id) + 1, NL) > layer_period(int'(layer_id), NL);
  end

  cio_clk_counter #(.CW(CW)) u_clk_counter (
    .clk     (clk),
    .rst_n   (rst_n),
    .tick_in (tick_in),
    .div_en  (div_en),
    .cnt     (cnt),
    .tick_out(tick_out)
  );

  cio_mux_ctrl #(.NL(NL), .CW(CW)) u_mux_ctrl (
    .cnt     (cnt),
    .layer_id(layer_id),
    .clk_mode(clk_mode),
    .sel_own (sel_own)
  );

  cio_read_ctrl #(
    .NL(NL), .W(W), .LINE(LINE), .BANKS(BANKS), .COL_W(COL_W)
  ) u_read_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .frame_tick(frame_tick),
    .rank_org  (rank_org),
    .layer_id  (layer_id),
    .cmd_valid (cmd_valid),
    .cmd_rank  (cmd_rank),
    .cmd_bank  (cmd_bank),
    .cmd_col   (cmd_col),
    .gsa_rd_en (gsa_rd_en),
    .gsa_bank  (gsa_bank),
    .gsa_col   (gsa_col),
    .gsa_beat  (gsa_beat),
    .busy      (busy)
  );

  cio_data_mux #(.W(W)) u_data_mux (
    .clk       (clk),
    .rst_n     (rst_n),
    .frame_tick(frame_tick),
    .gsa_valid (gsa_rd_en),
    .gsa_data  (gsa_data),
    .sel_own   (sel_own),
    .up_data   (up_data),
    .down_data (down_data),
    .own_valid (own_valid)
  );

endmodule
