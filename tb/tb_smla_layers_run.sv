// tb_smla_layers_run: checking harness for one smla_channel of L layers,
// used by tb_smla_layers to run stack heights other than the default.
//
// It holds the DUT, a DRAM core model (a function of layer, bank, column and
// beat), and a reference model of the channel's timing. It runs the channel
// through phases out of reset, one per supported combination of rank
// organisation and clock scheme: SLR always; optimized clocks only for L <= 4;
// MLR only when one frame (L x W bits) fits in a line. Each phase offers
// random reads and then a saturating stream, and checks every cycle:
// cmd_ready against the reference model, and every response's rank, tag, data
// and IO cycle (accepted at cycle a, valid at a + 2 + L*beats + r, where r is
// the rank for SLR and L-1 for MLR). In a 16-frame window of the saturating
// stream it checks the number of lines delivered and of idle slots: SLR
// delivers 16*min(L,4)/4 lines and leaves 16*(L-min(L,4)) slots idle (one
// command per baseline cycle feeds at most four layers of 4-beat bursts);
// MLR delivers 16/beats lines with no idle slot.
//
// Interface: done rises when all phases are over; checks and failures are
// the totals; n_* are the mechanism counts. It never calls $finish.
module tb_smla_layers_run #(
  parameter int L = 2
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_resp,
  output int   n_bypass,
  output int   n_hole,
  output int   n_stall,
  output int   n_b2b,
  output int   n_div,
  output int   n_phase
);
  import smla_pkg::*;
  localparam int W    = 128;
  localparam int LINE = 512;
  localparam int CW   = $clog2(L);
  localparam int BSLR = LINE / W;
  localparam int BMLR = LINE / (W * L);

  logic clk = 1'b0;
  logic rst_n;
  clk_mode_e clk_mode;
  rank_org_e rank_org;
  logic cmd_valid, cmd_ready;
  logic [CW-1:0] cmd_rank;
  logic [0:0] cmd_bank;
  logic [5:0] cmd_col;
  logic [7:0] cmd_tag;
  logic [L-1:0]        gsa_rd_en;
  logic [L-1:0][0:0]   gsa_bank;
  logic [L-1:0][5:0]   gsa_col;
  logic [L-1:0][1:0]   gsa_beat;
  logic [L-1:0][W-1:0] gsa_data;
  logic resp_valid;
  logic [CW-1:0] resp_rank;
  logic [7:0] resp_tag;
  logic [LINE-1:0] resp_data;
  logic [W-1:0] tsv_data;
  logic frame_tick, slot_hole;
  logic [CW-1:0] slot;
  logic [L-1:0] layer_tick, layer_sel_own, layer_own_valid, layer_busy;

  int cyc;
  int fetch_left[L];
  bit due_v[int];
  int due_rank[int], due_tag[int];
  logic [LINE-1:0] due_line[int];

  always #5 clk = ~clk;

  smla_channel #(.NL(L)) dut (
    .clk(clk), .rst_n(rst_n), .clk_mode(clk_mode), .rank_org(rank_org),
    .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd_rank(cmd_rank), .cmd_bank(cmd_bank),
    .cmd_col(cmd_col), .cmd_tag(cmd_tag),
    .gsa_rd_en(gsa_rd_en), .gsa_bank(gsa_bank), .gsa_col(gsa_col), .gsa_beat(gsa_beat),
    .gsa_data(gsa_data),
    .resp_valid(resp_valid), .resp_rank(resp_rank), .resp_tag(resp_tag), .resp_data(resp_data),
    .tsv_data(tsv_data), .frame_tick(frame_tick), .slot(slot), .slot_hole(slot_hole),
    .layer_tick(layer_tick), .layer_sel_own(layer_sel_own),
    .layer_own_valid(layer_own_valid), .layer_busy(layer_busy)
  );

  function automatic logic [W-1:0] model_word(int layer, int bank, int col, int beat);
    logic [W-1:0] w;
    for (int i = 0; i < W / 32; i++)
      w[i*32 +: 32] = 32'(32'h9E3779B1 * (layer * 1000003 + bank * 7919 + col * 131 + beat * 17 + i + 3))
                      ^ 32'(i << 24) ^ 32'(layer << 27);
    return w;
  endfunction

  always_comb
    for (int l = 0; l < L; l++)
      gsa_data[l] = model_word(l, int'(gsa_bank[l]), int'(gsa_col[l]), int'(gsa_beat[l]));

  task automatic fail(input string msg);
    failures++;
    $display("FAIL L=%0d cyc=%0d mode=%0d org=%0d: %s", L, cyc, clk_mode, rank_org, msg);
  endtask

  task automatic phase(input clk_mode_e cm, input rank_org_e org, input int rnd_frames, input int sat_frames);
    int beats, frames, sat_start, sat_end, sat_resp, sat_hole, exp_lines, exp_holes, act;
    beats  = (org == RANK_MLR) ? BMLR : BSLR;
    frames = rnd_frames + sat_frames;
    act    = (L < BSLR) ? L : BSLR;
    exp_lines = (org == RANK_MLR) ? 16 / beats : 16 * act / BSLR;
    exp_holes = (org == RANK_MLR) ? 0 : 16 * (L - act);
    clk_mode = cm; rank_org = org;
    rst_n = 1'b0; cmd_valid = 1'b0; cyc = 0;
    due_v.delete();
    for (int l = 0; l < L; l++) fetch_left[l] = 0;
    sat_resp = 0; sat_hole = 0;
    sat_start = (rnd_frames + 12) * L;
    sat_end   = sat_start + 16 * L;
    @(posedge clk); #1 rst_n = 1'b1;
    for (int i = 0; i < frames * L + 12 * L; i++) begin
      int s, e, f;
      bit want, exp_ready;
      s = cyc % L;
      f = cyc / L;
      @(negedge clk);
      want = 1'b0;
      if (f < rnd_frames) begin
        want = $urandom_range(0, 2) != 0;
        cmd_rank = CW'($urandom_range(0, L - 1));
      end else if (f < frames) begin
        want = 1'b1;
        cmd_rank = CW'(f % L);
      end
      cmd_valid = want;
      cmd_bank  = 1'($urandom_range(0, 1));
      cmd_col   = 6'($urandom_range(0, 63));
      cmd_tag   = 8'($urandom);
      e = (org == RANK_MLR) ? 0 : int'(cmd_rank);
      #1;
      exp_ready = (s == L - 1) && fetch_left[e] <= 1;
      checks++;
      if (cmd_ready !== exp_ready) fail($sformatf("cmd_ready=%0b expected %0b", cmd_ready, exp_ready));
      if (want && s == L - 1 && !exp_ready) n_stall++;
      checks++;
      if (resp_valid !== due_v.exists(cyc)) fail($sformatf("resp_valid=%0b", resp_valid));
      else if (resp_valid) begin
        n_resp++;
        if (cyc >= sat_start && cyc < sat_end) sat_resp++;
        checks++;
        if (int'(resp_rank) != due_rank[cyc] || int'(resp_tag) != due_tag[cyc])
          fail($sformatf("response rank %0d tag %0d, expected %0d %0d", resp_rank, resp_tag, due_rank[cyc], due_tag[cyc]));
        checks++;
        if (resp_data !== due_line[cyc]) fail("response data");
      end
      if (slot_hole) n_hole++;
      if (cyc >= sat_start && cyc < sat_end && slot_hole) sat_hole++;
      if (!slot_hole && s != 0 && !layer_sel_own[0]) n_bypass++;
      if (layer_tick[L-1] == 1'b0) n_div++;
      @(posedge clk);
      if (s == L - 1) begin
        bit last_fetch;
        last_fetch = (fetch_left[e] == 1);
        for (int l = 0; l < L; l++) if (fetch_left[l] > 0) fetch_left[l]--;
        if (cmd_valid && exp_ready) begin
          int r, due;
          logic [LINE-1:0] ln;
          r   = (org == RANK_MLR) ? L - 1 : int'(cmd_rank);
          due = cyc + 2 + L * beats + r;
          if (last_fetch) n_b2b++;
          fetch_left[e] = beats;
          if (org == RANK_MLR) begin
            for (int b = 0; b < BMLR; b++)
              for (int l = 0; l < L; l++)
                ln[(b*L + l)*W +: W] = model_word(l, int'(cmd_bank), int'(cmd_col), b);
          end else begin
            for (int b = 0; b < BSLR; b++)
              ln[b*W +: W] = model_word(int'(cmd_rank), int'(cmd_bank), int'(cmd_col), b);
          end
          due_v[due] = 1'b1;
          due_rank[due] = (org == RANK_MLR) ? 0 : int'(cmd_rank);
          due_tag[due] = int'(cmd_tag);
          due_line[due] = ln;
        end
      end
      cyc++;
    end
    checks += 2;
    if (sat_resp != exp_lines)
      fail($sformatf("saturated stream delivered %0d lines, expected %0d", sat_resp, exp_lines));
    if (sat_hole != exp_holes)
      fail($sformatf("saturated stream left %0d slots idle, expected %0d", sat_hole, exp_holes));
    n_phase++;
  endtask

  initial begin
    done = 1'b0;
    checks = 0; failures = 0; n_resp = 0; n_bypass = 0; n_hole = 0;
    n_stall = 0; n_b2b = 0; n_div = 0; n_phase = 0;
    clk_mode = CLK_IDENTICAL; rank_org = RANK_SLR;
    phase(CLK_IDENTICAL, RANK_SLR, 60, 40);
    if (opt_clock_supported(L)) phase(CLK_OPTIMIZED, RANK_SLR, 60, 40);
    if (L * W <= LINE) begin
      phase(CLK_IDENTICAL, RANK_MLR, 40, 40);
      if (opt_clock_supported(L)) phase(CLK_OPTIMIZED, RANK_MLR, 40, 40);
    end
    done = 1'b1;
  end
endmodule
