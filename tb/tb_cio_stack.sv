// tb_cio_stack: self-checking test of the four-layer Cascaded-IO stack.
//
// Each layer's DRAM core is modelled by a function of (layer, bank, column,
// beat). Random read commands are issued at frame ends to free ranks. The
// testbench predicts, independently of the stack, which word every layer
// fetches in every frame, and checks that in slot s of the following frame
// the bottom TSVs carry exactly layer s's word (zeros in a hole). It runs all
// four combinations of rank organisation (SLR, MLR) and clock scheme
// (identical, optimized) and checks each layer's clock rate in IO cycles
// per frame: 4/4/4/4 with identical clocks, 4/4/2/1 with optimized clocks.
// It counts the words of upper layers that reached the bottom through the
// bypass path of the layers below, and holes.
// Every intermediate TSV segment is checked too, from the layers' selects: in
// slot s the segment below layer i (i <= s) carries layer s's word exactly
// when layer s drives its own data and layers i .. s-1 bypass (the bottom
// bus data check above confirms the word itself). Over frames in which every
// layer has data, the segment below layer i must then be busy in L-i of L
// slots, the 100/75/50/25 % utilisation from bottom to top that the
// Cascaded-IO scheme predicts; the testbench counts it and compares.
module tb_cio_stack;
  import smla_pkg::*;
  localparam int L = 4;
  localparam int W = 128;
  logic clk = 1'b0;
  logic rst_n;
  clk_mode_e clk_mode;
  rank_org_e rank_org;
  logic cmd_valid;
  logic [1:0] cmd_rank;
  logic [0:0] cmd_bank;
  logic [5:0] cmd_col;
  logic [L-1:0]        gsa_rd_en;
  logic [L-1:0][0:0]   gsa_bank;
  logic [L-1:0][5:0]   gsa_col;
  logic [L-1:0][1:0]   gsa_beat;
  logic [L-1:0][W-1:0] gsa_data;
  logic [W-1:0]        tsv_data;
  logic frame_tick;
  logic [1:0] slot;
  logic [L-1:0] layer_tick, layer_sel_own, layer_own_valid, layer_busy;

  int checks = 0, failures = 0;
  int n_bypass = 0, n_hole = 0, n_own0 = 0;
  int cyc;
  int left[L], nb[L], rb[L], rc[L];
  logic [W-1:0] exp_word[L];   // word each layer drives in the current frame
  logic [W-1:0] nxt_word[L];
  int ticks[L];
  int util_busy[L], util_slots;

  always #5 clk = ~clk;

  cio_stack dut (
    .clk(clk), .rst_n(rst_n), .clk_mode(clk_mode), .rank_org(rank_org),
    .cmd_valid(cmd_valid), .cmd_rank(cmd_rank), .cmd_bank(cmd_bank), .cmd_col(cmd_col),
    .gsa_rd_en(gsa_rd_en), .gsa_bank(gsa_bank), .gsa_col(gsa_col), .gsa_beat(gsa_beat),
    .gsa_data(gsa_data), .tsv_data(tsv_data), .frame_tick(frame_tick), .slot(slot),
    .layer_tick(layer_tick), .layer_sel_own(layer_sel_own),
    .layer_own_valid(layer_own_valid), .layer_busy(layer_busy)
  );

  // DRAM core model: the word a layer's global sense amplifiers deliver
  function automatic logic [W-1:0] model_word(int layer, int bank, int col, int beat);
    logic [W-1:0] w;
    for (int i = 0; i < W / 32; i++)
      w[i*32 +: 32] = 32'(32'h9E3779B9 * (layer * 1000003 + bank * 7919 + col * 131 + beat * 17 + i + 1))
                      ^ 32'(i << 24) ^ 32'(layer << 28);
    return w;
  endfunction

  always_comb
    for (int l = 0; l < L; l++)
      gsa_data[l] = model_word(l, int'(gsa_bank[l]), int'(gsa_col[l]), int'(gsa_beat[l]));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input clk_mode_e cm, input rank_org_e org, input int frames);
    int exp_ticks[L];
    clk_mode = cm; rank_org = org;
    rst_n = 1'b0; cmd_valid = 1'b0; cyc = 0;
    for (int l = 0; l < L; l++) begin
      left[l] = 0; nb[l] = 0; exp_word[l] = '0; ticks[l] = 0;
      exp_ticks[l] = (cm == CLK_OPTIMIZED) ? L / layer_period(l, L) : L;
    end
    @(posedge clk); #1 rst_n = 1'b1;
    for (int i = 0; i < frames * L; i++) begin
      @(negedge clk);
      cmd_valid = 1'b0;
      cmd_rank  = 2'($urandom_range(0, L - 1));
      cmd_bank  = 1'($urandom_range(0, 1));
      cmd_col   = 6'($urandom_range(0, 63));
      if ((cyc % L) == L - 1 && $urandom_range(0, 4) != 0) begin
        if (org == RANK_MLR) cmd_valid = (left[0] <= 1);
        else                 cmd_valid = (left[cmd_rank] <= 1);
      end
      #1;
      // bottom TSVs carry the word of the layer owning this slot
      checks++;
      if (int'(slot) != cyc % L || frame_tick !== ((cyc % L) == L - 1)) begin
        failures++;
        $display("FAIL cyc=%0d slot=%0d frame_tick=%0b", cyc, slot, frame_tick);
      end
      checks++;
      if (tsv_data !== exp_word[cyc % L]) begin
        failures++;
        $display("FAIL mode=%0d org=%0d cyc=%0d slot %0d: bus %h expected %h",
                 cm, org, cyc, cyc % L, tsv_data[31:0], exp_word[cyc % L][31:0]);
      end
      if (exp_word[cyc % L] != '0) begin
        if (cyc % L != 0 && !layer_sel_own[0]) n_bypass++;
        if (cyc % L == 0) n_own0++;
      end else n_hole++;
      for (int l = 0; l < L; l++) ticks[l] += layer_tick[l];
      // intermediate segments: layer s's word passes below every layer i <= s
      begin
        bit all_data, path;
        int sl;
        sl = cyc % L;
        all_data = 1'b1;
        for (int l = 0; l < L; l++) if (exp_word[l] == '0) all_data = 1'b0;
        for (int l = 0; l <= sl; l++) begin
          path = layer_sel_own[sl];
          for (int k = l; k < sl; k++) if (layer_sel_own[k]) path = 1'b0;
          checks++;
          if (!path) begin
            failures++;
            $display("FAIL mode=%0d org=%0d cyc=%0d: layer %0d word does not pass below layer %0d", cm, org, cyc, sl, l);
          end else if (all_data) util_busy[l]++;
        end
        if (all_data) util_slots++;
      end
      @(posedge clk);
      if ((cyc % L) == L - 1) begin
        // words fetched in this frame appear in the next one
        for (int l = 0; l < L; l++) begin
          nxt_word[l] = (left[l] > 0) ? model_word(l, rb[l], rc[l], nb[l]) : '0;
          if (left[l] > 0) begin left[l]--; nb[l]++; end
        end
        if (cmd_valid) begin
          for (int l = 0; l < L; l++) begin
            if (org == RANK_MLR || l == int'(cmd_rank)) begin
              left[l] = (org == RANK_MLR) ? 1 : 4;
              nb[l] = 0; rb[l] = cmd_bank; rc[l] = cmd_col;
            end
          end
        end
        for (int l = 0; l < L; l++) exp_word[l] = nxt_word[l];
      end
      cyc++;
    end
    for (int l = 0; l < L; l++) begin
      checks++;
      if (ticks[l] != exp_ticks[l] * frames) begin
        failures++;
        $display("FAIL mode=%0d layer %0d clock edges %0d expected %0d", cm, l, ticks[l], exp_ticks[l] * frames);
      end
    end
  endtask

  initial begin
    clk_mode = CLK_IDENTICAL; rank_org = RANK_SLR;
    util_slots = 0;
    for (int l = 0; l < L; l++) util_busy[l] = 0;
    run(CLK_IDENTICAL, RANK_SLR, 120);
    run(CLK_OPTIMIZED, RANK_SLR, 120);
    run(CLK_IDENTICAL, RANK_MLR, 60);
    run(CLK_OPTIMIZED, RANK_MLR, 60);
    $display("bypassed words %0d, bottom-layer words %0d, holes %0d", n_bypass, n_own0, n_hole);
    for (int l = 0; l < L; l++) begin
      $display("layer %0d output busy in %0d of %0d fully loaded slots (%0d%%)", l, util_busy[l], util_slots,
               util_slots ? 100 * util_busy[l] / util_slots : 0);
      checks++;
      if (util_slots < 4 * L || util_busy[l] * L != util_slots * (L - l)) begin
        failures++;
        $display("FAIL layer %0d utilisation, expected %0d%%", l, 100 * (L - l) / L);
      end
    end
    checks++;
    if (n_bypass == 0 || n_own0 == 0 || n_hole == 0) begin
      failures++;
      $display("FAIL a mechanism was not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
