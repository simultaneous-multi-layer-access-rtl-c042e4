// smla_rx: controller-side receiver of a Cascaded-IO channel.
//
// The controller knows when each read it issued will come back, because the
// stack's latency is fixed and the time slots are assigned statically. This
// block mirrors that schedule. It accepts the same commands the stack sees,
// tells the issuing logic which ranks can take a command, picks the words of
// each read out of the bottom TSV bus and returns the complete 64-byte line.
//
//   * SLR: entry r belongs to rank r (layer r). Its words arrive in slot r of
//     LINE/W consecutive frames; the line is complete after slot r of the last
//     of them, so the bottom rank finishes first (13 IO cycles after the
//     first data frame starts, for four layers) and the top rank last (16).
//     Slots of ranks with no read in flight are holes.
//   * MLR: one entry; every slot of a data frame carries one layer's share,
//     word (beat*L + slot) of the line, complete after the last slot.
//
// Timing (identical to the stack): a command accepted at the end of frame f-1
// has its words on the TSVs in frames f+1 .. f+beats. rank_free[e] is high in
// a frame at whose end a new command for entry e may be accepted: the entry is
// idle or its layer fetches its last word in this frame. resp_* is registered
// and valid for one IO cycle after the last word's slot.
//
// MLR is supported when one frame fits in a line (NL*W <= LINE, true for two
// and four layers with 128 TSVs and 64-byte lines); an assertion flags MLR
// on a taller stack.
//
// Entirely this design's own: the paper says the controller knows the slot
// assignment but does not describe its receive logic.
module smla_rx
  import smla_pkg::*;
#(
  parameter int unsigned NL    = smla_pkg::NUM_LAYERS,
  parameter int unsigned W     = smla_pkg::IO_WIDTH,
  parameter int unsigned LINE  = smla_pkg::LINE_BITS,
  parameter int unsigned TAG_W = smla_pkg::TAG_BITS,
  parameter int unsigned CW    = (NL > 1) ? $clog2(NL) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  rank_org_e        rank_org,
  input  logic             frame_tick,
  input  logic [CW-1:0]    slot,
  input  logic [W-1:0]     tsv_data,
  input  logic             cmd_valid,    // command accepted at this frame_tick
  input  logic [CW-1:0]    cmd_rank,
  input  logic [TAG_W-1:0] cmd_tag,
  output logic [NL-1:0]    rank_free,
  output logic             slot_hole,    // current slot carries no read data
  output logic             resp_valid,
  output logic [CW-1:0]    resp_rank,
  output logic [TAG_W-1:0] resp_tag,
  output logic [LINE-1:0]  resp_data
);

  localparam int unsigned BEATS_SLR = LINE / W;
  localparam int unsigned BEATS_MLR = (LINE / (W * NL) > 0) ? LINE / (W * NL) : 1;
  localparam int unsigned BTW       = (BEATS_SLR > 1) ? $clog2(BEATS_SLR) : 1;
  localparam int unsigned FW        = $clog2(BEATS_SLR + 1);
  localparam int unsigned PW        = (LINE / W > 1) ? $clog2(LINE / W) : 1;

  logic [NL-1:0]             pend, recv;
  logic [NL-1:0][TAG_W-1:0]  pend_tag, recv_tag;
  logic [NL-1:0][BTW-1:0]    recv_beat;
  logic [NL-1:0][FW-1:0]     fetch_left;
  logic [NL-1:0][LINE-1:0]   line;

  logic [BTW-1:0]  last_beat;
  logic [FW-1:0]   beats;
  logic [CW-1:0]   cmd_entry;
  logic [CW-1:0]   cap_entry;    // entry whose word is on the bus now
  logic [PW-1:0]   cap_part;     // W-bit part of the line it fills
  logic            cap_en, cap_last;
  logic [LINE-1:0] cap_line;

  always_comb begin
    last_beat = (rank_org == RANK_MLR) ? BTW'(BEATS_MLR - 1) : BTW'(BEATS_SLR - 1);
    beats     = (rank_org == RANK_MLR) ? FW'(BEATS_MLR) : FW'(BEATS_SLR);
    cmd_entry = (rank_org == RANK_MLR) ? '0 : cmd_rank;
    cap_entry = (rank_org == RANK_MLR) ? '0 : slot;
    if (rank_org == RANK_MLR) begin
      cap_part = PW'(int'(recv_beat[0]) * NL + int'(slot));
      cap_last = (recv_beat[0] == last_beat) && (slot == CW'(NL - 1));
    end else begin
      cap_part = PW'(recv_beat[cap_entry]);
      cap_last = (recv_beat[cap_entry] == last_beat);
    end
    cap_en   = recv[cap_entry];
    cap_line = line[cap_entry];
    cap_line[cap_part*W +: W] = tsv_data;
  end

  for (genvar e = 0; e < NL; e++) begin : g_free
    assign rank_free[e] = (fetch_left[e] <= FW'(1));
  end
  assign slot_hole = ~recv[cap_entry];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend       <= '0;
      recv       <= '0;
      pend_tag   <= '0;
      recv_tag   <= '0;
      recv_beat  <= '0;
      fetch_left <= '0;
      line       <= '0;
      resp_valid <= 1'b0;
      resp_rank  <= '0;
      resp_tag   <= '0;
      resp_data  <= '0;
    end else begin
      resp_valid <= 1'b0;
      if (cap_en) begin
        line[cap_entry] <= cap_line;
        if (cap_last) begin
          resp_valid <= 1'b1;
          resp_rank  <= cap_entry;
          resp_tag   <= recv_tag[cap_entry];
          resp_data  <= cap_line;
        end
      end
      if (frame_tick) begin
        for (int e = 0; e < NL; e++) begin
          if (fetch_left[e] != '0) fetch_left[e] <= fetch_left[e] - 1'b1;
          if (pend[e]) begin
            recv[e]      <= 1'b1;
            recv_beat[e] <= '0;
            recv_tag[e]  <= pend_tag[e];
            pend[e]      <= 1'b0;
          end else if (recv[e]) begin
            if (recv_beat[e] == last_beat) recv[e] <= 1'b0;
            else                           recv_beat[e] <= recv_beat[e] + 1'b1;
          end
        end
        if (cmd_valid) begin
          pend[cmd_entry]       <= 1'b1;
          pend_tag[cmd_entry]   <= cmd_tag;
          fetch_left[cmd_entry] <= beats;
        end
      end
    end
  end

  a_cmd_to_free_rank: assert property (@(posedge clk) disable iff (!rst_n)
    (frame_tick && cmd_valid) |-> rank_free[cmd_entry])
    else $error("command accepted for a busy rank");

  // MLR assumes that one frame (one word from every layer) fits in a line.
  a_mlr_frame_fits_line: assert property (@(posedge clk) disable iff (!rst_n)
    (rank_org == RANK_MLR) |-> (NL * W <= LINE))
    else $error("MLR needs NL*W <= LINE");

endmodule
