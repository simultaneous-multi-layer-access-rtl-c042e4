// tb_smla_channel: end-to-end test of one SMLA channel with Cascaded-IO, at
// the default configuration (four layers, 128 TSVs, 64-byte lines).
//
// A DRAM core model (a function of layer, bank, column and beat) answers each
// layer's global sense amplifier port. Reads are offered every frame; the
// testbench keeps its own account of which ranks are free, checks cmd_ready
// against it, and predicts every response: its rank, tag, full line and the
// IO cycle it appears in (SLR: 13 + rank cycles after the first data frame
// begins, i.e. 16.25 / 17.5 / 18.75 / 20 ns at 800 MHz; MLR: 4 cycles, 5 ns).
//
// Four phases, each out of reset: {SLR, MLR} x {identical, optimized clocks}.
// Each phase first offers random reads, then a saturating stream (SLR: ranks
// in turn, one read per frame; MLR: one read per frame), during which the bus
// must carry read data in every slot, one 64-byte line per baseline cycle,
// four times what one layer per baseline cycle would deliver.
// Counted mechanisms, each of which must occur: SLR, MLR, identical clocks,
// optimized (divided) clocks, bypass through lower layers, holes, commands
// held back by a busy rank, back-to-back bursts to one rank, saturated bus.
module tb_smla_channel;
  import smla_pkg::*;
  localparam int L = 4;
  localparam int W = 128;
  localparam int LINE = 512;
  logic clk = 1'b0;
  logic rst_n;
  clk_mode_e clk_mode;
  rank_org_e rank_org;
  logic cmd_valid, cmd_ready;
  logic [1:0] cmd_rank;
  logic [0:0] cmd_bank;
  logic [5:0] cmd_col;
  logic [7:0] cmd_tag;
  logic [L-1:0]        gsa_rd_en;
  logic [L-1:0][0:0]   gsa_bank;
  logic [L-1:0][5:0]   gsa_col;
  logic [L-1:0][1:0]   gsa_beat;
  logic [L-1:0][W-1:0] gsa_data;
  logic resp_valid;
  logic [1:0] resp_rank;
  logic [7:0] resp_tag;
  logic [LINE-1:0] resp_data;
  logic [W-1:0] tsv_data;
  logic frame_tick, slot_hole;
  logic [1:0] slot;
  logic [L-1:0] layer_tick, layer_sel_own, layer_own_valid, layer_busy;

  int checks = 0, failures = 0;
  int n_slr = 0, n_mlr = 0, n_ident = 0, n_opt = 0, n_bypass = 0, n_hole = 0;
  int n_stall = 0, n_b2b = 0, n_sat = 0, n_resp = 0, n_div = 0;
  int cyc;
  int fetch_left[L];
  bit due_v[int];
  int due_rank[int], due_tag[int];
  logic [LINE-1:0] due_line[int];

  always #5 clk = ~clk;

  smla_channel dut (
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

  // DRAM core model of every layer
  function automatic logic [W-1:0] model_word(int layer, int bank, int col, int beat);
    logic [W-1:0] w;
    for (int i = 0; i < W / 32; i++)
      w[i*32 +: 32] = 32'(32'hC2B2AE35 * (layer * 1000003 + bank * 7919 + col * 131 + beat * 17 + i + 5))
                      ^ 32'(i << 24) ^ 32'(layer << 28);
    return w;
  endfunction

  always_comb
    for (int l = 0; l < L; l++)
      gsa_data[l] = model_word(l, int'(gsa_bank[l]), int'(gsa_col[l]), int'(gsa_beat[l]));

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string msg);
    failures++;
    $display("FAIL cyc=%0d mode=%0d org=%0d: %s", cyc, clk_mode, rank_org, msg);
  endtask

  task automatic phase(input clk_mode_e cm, input rank_org_e org, input int rnd_frames, input int sat_frames);
    int beats, frames, sat_start, sat_end, sat_resp, sat_hole;
    beats = (org == RANK_MLR) ? 1 : 4;
    frames = rnd_frames + sat_frames;
    clk_mode = cm; rank_org = org;
    rst_n = 1'b0; cmd_valid = 1'b0; cyc = 0;
    due_v.delete();
    for (int l = 0; l < L; l++) fetch_left[l] = 0;
    sat_resp = 0; sat_hole = 0;
    sat_start = (rnd_frames + 10) * L;  // steady state of the saturating stream
    sat_end   = sat_start + 16 * L;      // a whole number of rank rotations
    @(posedge clk); #1 rst_n = 1'b1;
    for (int i = 0; i < frames * L + 48; i++) begin
      int s, e, f;
      bit want, exp_ready;
      s = cyc % L;
      f = cyc / L;
      @(negedge clk);
      want = 1'b0;
      if (f < rnd_frames) begin
        want = $urandom_range(0, 3) != 0;
        cmd_rank = 2'($urandom_range(0, L - 1));
      end else if (f < frames) begin
        want = 1'b1;
        cmd_rank = 2'(f % L);
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
      // responses
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
      // observed mechanisms
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
          if (last_fetch && org == RANK_SLR) n_b2b++;
          fetch_left[e] = beats;
          if (org == RANK_MLR) for (int l = 0; l < L; l++) ln[l*W +: W] = model_word(l, int'(cmd_bank), int'(cmd_col), 0);
          else for (int b = 0; b < 4; b++) ln[b*W +: W] = model_word(int'(cmd_rank), int'(cmd_bank), int'(cmd_col), b);
          due_v[due] = 1'b1;
          due_rank[due] = (org == RANK_MLR) ? 0 : int'(cmd_rank);
          due_tag[due] = int'(cmd_tag);
          due_line[due] = ln;
        end
      end
      cyc++;
    end
    // saturated stream: a full line per baseline cycle and no idle slot
    checks += 2;
    if (sat_resp != (sat_end - sat_start) / L)
      fail($sformatf("saturated stream delivered %0d lines in %0d frames", sat_resp, (sat_end - sat_start) / L));
    if (sat_hole != 0) fail($sformatf("%0d idle slots in the saturated stream", sat_hole));
    else n_sat++;
    if (org == RANK_SLR) n_slr++; else n_mlr++;
    if (cm == CLK_OPTIMIZED) n_opt++; else n_ident++;
  endtask

  initial begin
    clk_mode = CLK_IDENTICAL; rank_org = RANK_SLR;
    phase(CLK_OPTIMIZED, RANK_SLR, 80, 30);
    phase(CLK_IDENTICAL, RANK_SLR, 60, 30);
    phase(CLK_OPTIMIZED, RANK_MLR, 60, 30);
    phase(CLK_IDENTICAL, RANK_MLR, 40, 30);
    $display("responses %0d | SLR %0d MLR %0d identical %0d optimized %0d | bypass %0d holes %0d stalls %0d back-to-back %0d divided-clock cycles %0d saturated %0d",
             n_resp, n_slr, n_mlr, n_ident, n_opt, n_bypass, n_hole, n_stall, n_b2b, n_div, n_sat);
    checks++;
    if (n_slr == 0 || n_mlr == 0 || n_ident == 0 || n_opt == 0 || n_bypass == 0 || n_hole == 0 ||
        n_stall == 0 || n_b2b == 0 || n_div == 0 || n_sat == 0 || n_resp < 200) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
