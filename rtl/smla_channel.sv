// smla_channel: one memory channel of a Simultaneous Multi Layer Access
// (SMLA) 3D-stacked DRAM with Cascaded-IO.
//
// The stack (cio_stack) lets all layers deliver read data at once: the IO
// clock runs L times faster than the baseline clock, and the shared TSV bus is
// time-multiplexed so that slot s of each frame (one baseline period) carries
// layer s, relayed through the multiplexers of the layers below. The
// controller side (smla_rx) knows the slot schedule and rebuilds each 64-byte
// line from the bus. With four layers the channel moves four times the data of
// a stack that lets only one layer use the bus per baseline cycle.
//
// Interface, all synchronous to clk, the IO clock (F x L):
//   * clk_mode, rank_org: configuration, to be changed only during reset.
//   * cmd_*: read command. It is taken when cmd_valid and cmd_ready are high
//     in the same cycle; cmd_ready is high only in the last IO cycle of a frame
//     (frame_tick) and only if the target rank (SLR) or the stack (MLR) can
//     start a burst. At most one command per frame, the baseline rate.
//   * gsa_*: per-layer port to each layer's DRAM core (cell array, row buffer,
//     global sense amplifiers), which is not logic and lies outside. A layer
//     asserts gsa_rd_en for a whole frame with a bank / column / beat address;
//     gsa_data must hold the addressed word by the end of that frame.
//   * resp_*: the complete line, valid for one cycle, tagged with cmd_tag.
//   * tsv_data, slot, frame_tick, slot_hole, layer_*: observation of the
//     bottom TSV bus, the slot schedule and each layer's clock and multiplexer.
//
// layer_tick[0] is constant 1 (the bottom layer sees every IO clock edge).
//
// Latency: a command taken at the end of frame f-1 puts its words on the
// bus in frames f+1 .. f+beats. Four layers, SLR: 4 frames, response after
// 13..16 IO cycles of the first data frame (bottom to top rank). MLR: one
// frame, response after 4 IO cycles.
module smla_channel
  import smla_pkg::*;
#(
  parameter int unsigned NL    = smla_pkg::NUM_LAYERS,
  parameter int unsigned W     = smla_pkg::IO_WIDTH,
  parameter int unsigned LINE  = smla_pkg::LINE_BITS,
  parameter int unsigned BANKS = smla_pkg::BANKS_PER_RANK,
  parameter int unsigned COL_W = smla_pkg::COL_BITS,
  parameter int unsigned TAG_W = smla_pkg::TAG_BITS,
  parameter int unsigned CW    = (NL > 1) ? $clog2(NL) : 1,
  parameter int unsigned BKW   = (BANKS > 1) ? $clog2(BANKS) : 1,
  parameter int unsigned BTW   = (LINE / W > 1) ? $clog2(LINE / W) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  clk_mode_e                clk_mode,
  input  rank_org_e                rank_org,
  // read commands
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  logic [CW-1:0]            cmd_rank,
  input  logic [BKW-1:0]           cmd_bank,
  input  logic [COL_W-1:0]         cmd_col,
  input  logic [TAG_W-1:0]         cmd_tag,
  // DRAM cores of the layers
  output logic [NL-1:0]            gsa_rd_en,
  output logic [NL-1:0][BKW-1:0]   gsa_bank,
  output logic [NL-1:0][COL_W-1:0] gsa_col,
  output logic [NL-1:0][BTW-1:0]   gsa_beat,
  input  logic [NL-1:0][W-1:0]     gsa_data,
  // read responses
  output logic                     resp_valid,
  output logic [CW-1:0]            resp_rank,
  output logic [TAG_W-1:0]         resp_tag,
  output logic [LINE-1:0]          resp_data,
  // observation
  output logic [W-1:0]             tsv_data,
  output logic                     frame_tick,
  output logic [CW-1:0]            slot,
  output logic                     slot_hole,
  output logic [NL-1:0]            layer_tick,
  output logic [NL-1:0]            layer_sel_own,
  output logic [NL-1:0]            layer_own_valid,
  output logic [NL-1:0]            layer_busy
);

  logic [NL-1:0] rank_free;
  logic          accept;

  assign cmd_ready = frame_tick && ((rank_org == RANK_MLR) ? rank_free[0] : rank_free[cmd_rank]);
  assign accept    = cmd_valid && cmd_ready;

  cio_stack #(
    .NL(NL), .W(W), .LINE(LINE), .BANKS(BANKS), .COL_W(COL_W)
  ) u_stack (
    .clk            (clk),
    .rst_n          (rst_n),
    .clk_mode       (clk_mode),
    .rank_org       (rank_org),
    .cmd_valid      (accept),
    .cmd_rank       (cmd_rank),
    .cmd_bank       (cmd_bank),
    .cmd_col        (cmd_col),
    .gsa_rd_en      (gsa_rd_en),
    .gsa_bank       (gsa_bank),
    .gsa_col        (gsa_col),
    .gsa_beat       (gsa_beat),
    .gsa_data       (gsa_data),
    .tsv_data       (tsv_data),
    .frame_tick     (frame_tick),
    .slot           (slot),
    .layer_tick     (layer_tick),
    .layer_sel_own  (layer_sel_own),
    .layer_own_valid(layer_own_valid),
    .layer_busy     (layer_busy)
  );

  smla_rx #(
    .NL(NL), .W(W), .LINE(LINE), .TAG_W(TAG_W)
  ) u_rx (
    .clk       (clk),
    .rst_n     (rst_n),
    .rank_org  (rank_org),
    .frame_tick(frame_tick),
    .slot      (slot),
    .tsv_data  (tsv_data),
    .cmd_valid (accept),
    .cmd_rank  (cmd_rank),
    .cmd_tag   (cmd_tag),
    .rank_free (rank_free),
    .slot_hole (slot_hole),
    .resp_valid(resp_valid),
    .resp_rank (resp_rank),
    .resp_tag  (resp_tag),
    .resp_data (resp_data)
  );

endmodule
