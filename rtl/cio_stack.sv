// cio_stack: a 3D-stacked DRAM channel with Cascaded-IO, NL identical layers.
//
// The layers are chained two ways:
//   * clock path, bottom to top: the IO clock enters the bottom layer (a tick
//     every IO cycle) and each layer's clock counter hands its possibly halved
//     clock to the layer above;
//   * TSV data path, top to bottom: each layer's down_data is the up_data of
//     the layer below; the top layer sees an all-zero segment above it; the
//     bottom layer's down_data is the channel's data bus (tsv_data).
// In slot s of every frame only layer s selects its own data and all layers
// below it bypass, so tsv_data carries layer 0, 1, ..., NL-1 in turn.
//
// The baseline clock (frame_tick, high in the last IO cycle of a frame) is
// derived from the bottom layer's counter and shared by all layers; slot is the
// bottom counter value, the index of the current IO cycle within the frame.
// All layer-indexed ports are packed arrays indexed by layer position.
//
// Follows the paper: clock entering at the bottom and climbing through one
// counter per layer, data leaving at the bottom through each layer's
// multiplexers, slot s carrying layer s. Own choices: the shared frame_tick
// and the all-zero segment above the top layer.
//
// Lint notes: the top layer's outgoing clock (tick[NL]) and the upper layers'
// counter values other than the bottom one are not used here (every layer is
// the same circuit, so the top one also has a clock output), and
// layer_tick[0] is constant 1 because the bottom layer sees every IO clock
// edge; both are expected.
module cio_stack
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
  input  logic                        clk,
  input  logic                        rst_n,
  input  clk_mode_e                   clk_mode,
  input  rank_org_e                   rank_org,
  input  logic                        cmd_valid,
  input  logic [CW-1:0]               cmd_rank,
  input  logic [BKW-1:0]              cmd_bank,
  input  logic [COL_W-1:0]            cmd_col,
  output logic [NL-1:0]               gsa_rd_en,
  output logic [NL-1:0][BKW-1:0]      gsa_bank,
  output logic [NL-1:0][COL_W-1:0]    gsa_col,
  output logic [NL-1:0][BTW-1:0]      gsa_beat,
  input  logic [NL-1:0][W-1:0]        gsa_data,
  output logic [W-1:0]                tsv_data,    // bottom TSVs, to the controller
  output logic                        frame_tick,
  output logic [CW-1:0]               slot,
  output logic [NL-1:0]               layer_tick,  // local clock edge per layer
  output logic [NL-1:0]               layer_sel_own,
  output logic [NL-1:0]               layer_own_valid,
  output logic [NL-1:0]               layer_busy
);

  logic [NL:0]               tick;
  logic [NL:0][W-1:0]        seg;     // seg[i]: TSV segment above layer i-1 / below layer i
  logic [NL-1:0][CW-1:0]     cnt;

  assign tick[0]    = 1'b1;
  assign seg[NL]    = '0;
  assign tsv_data   = seg[0];
  assign slot       = cnt[0];
  assign frame_tick = (cnt[0] == CW'(NL - 1));
  assign layer_tick = tick[NL-1:0];

  for (genvar i = 0; i < NL; i++) begin : g_layer
    cio_layer #(
      .NL(NL), .W(W), .LINE(LINE), .BANKS(BANKS), .COL_W(COL_W)
    ) u_layer (
      .clk       (clk),
      .rst_n     (rst_n),
      .layer_id  (CW'(i)),
      .clk_mode  (clk_mode),
      .rank_org  (rank_org),
      .tick_in   (tick[i]),
      .tick_out  (tick[i+1]),
      .frame_tick(frame_tick),
      .cnt       (cnt[i]),
      .cmd_valid (cmd_valid),
      .cmd_rank  (cmd_rank),
      .cmd_bank  (cmd_bank),
      .cmd_col   (cmd_col),
      .gsa_rd_en (gsa_rd_en[i]),
      .gsa_bank  (gsa_bank[i]),
      .gsa_col   (gsa_col[i]),
      .gsa_beat  (gsa_beat[i]),
      .gsa_data  (gsa_data[i]),
      .up_data   (seg[i+1]),
      .down_data (seg[i]),
      .sel_own   (layer_sel_own[i]),
      .own_valid (layer_own_valid[i]),
      .busy      (layer_busy[i])
    );
  end

  // Exactly one layer drives its own data onto the bottom TSVs per IO cycle:
  // the layer whose index equals the slot, all layers below it bypassing.
  for (genvar i = 0; i < NL; i++) begin : g_chk
    a_slot_owner: assert property (@(posedge clk) disable iff (!rst_n)
      (slot == CW'(i)) |-> layer_sel_own[i])
      else $error("layer %0d does not drive its own slot", i);
    if (i > 0) begin : g_below
      a_lower_bypass: assert property (@(posedge clk) disable iff (!rst_n)
        (slot == CW'(i)) |-> (layer_sel_own[i-1:0] == '0))
        else $error("a layer below %0d blocks its slot", i);
    end
  end

endmodule
