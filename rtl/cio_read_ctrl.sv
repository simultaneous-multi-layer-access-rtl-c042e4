// cio_read_ctrl: read sequencer of one layer.
//
// Decides whether the layer serves a read command and, if so, fetches the
// layer's share of the 64-byte line from its global sense amplifiers, one
// IO-width word per frame (one baseline clock period, the in-DRAM rate).
//   * Single-Layer Ranks (SLR): each layer is a rank. Only the layer whose
//     position equals cmd_rank answers and supplies the whole line in
//     LINE/W beats (4 frames for 512 bits over 128 TSVs).
//   * Multi-Layer Rank (MLR): all layers answer every command and each
//     supplies LINE/(W*L) beats (one frame for four layers), so the line is
//     spread over the layers and delivered in one frame.
//
// Timing: commands are sampled on frame_tick (the last IO cycle of a frame).
// A command sampled at the end of frame f-1 makes gsa_rd_en high during frames
// f .. f+beats-1 with gsa_beat counting 0, 1, ...; the data mux captures each
// word at the end of its frame, so beat b is on the TSVs in frame f+1+b.
// A new command for a layer is allowed on the frame_tick that ends its last
// beat (back-to-back bursts); earlier is a rank conflict the controller must
// avoid (checked by an assertion).
//
// Follows the paper: SLR/MLR rank organisations, 64-byte requests, one
// word per baseline cycle from the global sense amplifiers. Own choices: the
// one-frame command-to-fetch latency, the address split into bank / column /
// beat, and sampling commands only at frame boundaries (the command rate of
// the slowest, top layer).
module cio_read_ctrl
  import smla_pkg::*;
#(
  parameter int unsigned NL    = smla_pkg::NUM_LAYERS,
  parameter int unsigned W     = smla_pkg::IO_WIDTH,
  parameter int unsigned LINE  = smla_pkg::LINE_BITS,
  parameter int unsigned BANKS = smla_pkg::BANKS_PER_RANK,
  parameter int unsigned COL_W = smla_pkg::COL_BITS,
  parameter int unsigned CW    = (NL > 1) ? $clog2(NL) : 1,
  parameter int unsigned BKW   = (BANKS > 1) ? $clog2(BANKS) : 1,
  parameter int unsigned BEATS_SLR = LINE / W,
  parameter int unsigned BTW   = (BEATS_SLR > 1) ? $clog2(BEATS_SLR) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             frame_tick,  // last IO cycle of a frame
  input  rank_org_e        rank_org,    // SLR or MLR
  input  logic [CW-1:0]    layer_id,    // position in the stack
  input  logic             cmd_valid,   // accepted read command (held to frame_tick)
  input  logic [CW-1:0]    cmd_rank,    // target rank (SLR); ignored in MLR
  input  logic [BKW-1:0]   cmd_bank,
  input  logic [COL_W-1:0] cmd_col,
  output logic             gsa_rd_en,   // fetch a word this frame
  output logic [BKW-1:0]   gsa_bank,
  output logic [COL_W-1:0] gsa_col,
  output logic [BTW-1:0]   gsa_beat,    // which word of the layer's share
  output logic             busy         // a burst is in progress
);

  localparam int unsigned BEATS_MLR = (LINE / (W * NL) > 0) ? LINE / (W * NL) : 1;

  logic             active;
  logic [BTW-1:0]   beat;
  logic [BKW-1:0]   bank_q;
  logic [COL_W-1:0] col_q;
  logic [BTW-1:0]   last_beat;
  logic             start;

  assign last_beat = (rank_org == RANK_MLR) ? BTW'(BEATS_MLR - 1) : BTW'(BEATS_SLR - 1);
  assign start     = cmd_valid && (rank_org == RANK_MLR || cmd_rank == layer_id);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      beat   <= '0;
      bank_q <= '0;
      col_q  <= '0;
    end else if (frame_tick) begin
      if (start) begin
        active <= 1'b1;
        beat   <= '0;
        bank_q <= cmd_bank;
        col_q  <= cmd_col;
      end else if (active) begin
        if (beat == last_beat) active <= 1'b0;
        else                   beat   <= beat + 1'b1;
      end
    end
  end

  assign gsa_rd_en = active;
  assign gsa_bank  = bank_q;
  assign gsa_col   = col_q;
  assign gsa_beat  = beat;
  assign busy      = active;

  // A layer may take a new command only when it is idle or finishing its
  // last beat in this frame.
  a_no_rank_conflict: assert property (@(posedge clk) disable iff (!rst_n)
    (frame_tick && start) |-> (!active || beat == last_beat))
    else $error("read command to a layer whose burst is still running");

endmodule
