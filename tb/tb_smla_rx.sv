// tb_smla_rx: self-checking test of the controller-side receiver.
//
// The testbench plays the stack: it puts on the TSV bus, in slot s of each
// frame, the word layer s fetched in the previous frame, following the fixed
// schedule (a command taken at the end of frame f-1 is fetched in frames
// f .. f+beats-1 and seen on the bus one frame later). Random commands with
// random tags go to ranks the testbench itself considers free, and
// rank_free is checked against that. Every response is checked for rank,
// tag, the full 512-bit line and its cycle: for four layers, SLR responses
// come 13 + rank IO cycles after the first data frame starts (16.25 to 20 ns
// at 800 MHz) and MLR responses 4 cycles after (5 ns). Holes are counted.
module tb_smla_rx;
  import smla_pkg::*;
  localparam int L = 4;
  localparam int W = 128;
  localparam int LINE = 512;
  logic clk = 1'b0;
  logic rst_n;
  rank_org_e rank_org;
  logic frame_tick;
  logic [1:0] slot;
  logic [W-1:0] tsv_data;
  logic cmd_valid;
  logic [1:0] cmd_rank;
  logic [7:0] cmd_tag;
  logic [L-1:0] rank_free;
  logic slot_hole, resp_valid;
  logic [1:0] resp_rank;
  logic [7:0] resp_tag;
  logic [LINE-1:0] resp_data;

  int checks = 0, failures = 0, n_resp = 0, n_hole = 0;
  int cyc;
  int left[L], nb[L], rb[L], rc[L];
  logic [W-1:0] exp_word[L], nxt_word[L];
  bit due_v[int];
  int due_rank[int], due_tag[int];
  logic [LINE-1:0] due_line[int];

  always #5 clk = ~clk;

  smla_rx dut (
    .clk(clk), .rst_n(rst_n), .rank_org(rank_org), .frame_tick(frame_tick), .slot(slot),
    .tsv_data(tsv_data), .cmd_valid(cmd_valid), .cmd_rank(cmd_rank), .cmd_tag(cmd_tag),
    .rank_free(rank_free), .slot_hole(slot_hole), .resp_valid(resp_valid),
    .resp_rank(resp_rank), .resp_tag(resp_tag), .resp_data(resp_data)
  );

  function automatic logic [W-1:0] model_word(int layer, int bank, int col, int beat);
    logic [W-1:0] w;
    for (int i = 0; i < W / 32; i++)
      w[i*32 +: 32] = 32'(32'h9E3779B9 * (layer * 1000003 + bank * 7919 + col * 131 + beat * 17 + i + 1))
                      ^ 32'(i << 24) ^ 32'(layer << 28);
    return w;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input rank_org_e org, input int frames);
    int beats;
    beats = (org == RANK_MLR) ? 1 : 4;
    rank_org = org;
    rst_n = 1'b0; cmd_valid = 1'b0; frame_tick = 1'b0; slot = '0; tsv_data = '0; cyc = 0;
    due_v.delete();
    for (int l = 0; l < L; l++) begin left[l] = 0; nb[l] = 0; exp_word[l] = '0; end
    @(posedge clk); #1 rst_n = 1'b1;
    for (int i = 0; i < frames * L + 40; i++) begin
      int s, e;
      s = cyc % L;
      @(negedge clk);
      slot = 2'(s);
      frame_tick = (s == L - 1);
      tsv_data = exp_word[s];
      cmd_rank = 2'($urandom_range(0, L - 1));
      cmd_tag  = 8'($urandom);
      e = (org == RANK_MLR) ? 0 : int'(cmd_rank);
      cmd_valid = frame_tick && (i < frames * L) && ($urandom_range(0, 4) != 0) && left[e] <= 1;
      #1;
      for (int l = 0; l < L; l++) begin
        checks++;
        if ((org == RANK_SLR || l == 0) && rank_free[l] !== (left[l] <= 1)) begin
          failures++;
          $display("FAIL org=%0d cyc=%0d rank_free[%0d]=%0b", org, cyc, l, rank_free[l]);
        end
      end
      checks++;
      if (resp_valid !== due_v.exists(cyc)) begin
        failures++;
        $display("FAIL org=%0d cyc=%0d resp_valid=%0b expected %0b", org, cyc, resp_valid, due_v.exists(cyc));
      end else if (resp_valid) begin
        n_resp++;
        checks++;
        if (int'(resp_rank) != due_rank[cyc] || int'(resp_tag) != due_tag[cyc] || resp_data !== due_line[cyc]) begin
          failures++;
          $display("FAIL org=%0d cyc=%0d response rank %0d tag %0d", org, cyc, resp_rank, resp_tag);
        end
      end
      if (slot_hole) n_hole++;
      checks++;
      if (slot_hole !== (exp_word[s] == '0)) begin
        failures++;
        $display("FAIL org=%0d cyc=%0d slot_hole=%0b", org, cyc, slot_hole);
      end
      @(posedge clk);
      if (frame_tick) begin
        for (int l = 0; l < L; l++) begin
          nxt_word[l] = (left[l] > 0) ? model_word(l, rb[l], rc[l], nb[l]) : '0;
          if (left[l] > 0) begin left[l]--; nb[l]++; end
        end
        if (cmd_valid) begin
          int bank, col, r, due;
          logic [LINE-1:0] ln;
          bank = $urandom_range(0, 1);
          col  = $urandom_range(0, 63);
          r    = (org == RANK_MLR) ? L - 1 : int'(cmd_rank);
          due  = cyc + 2 + L * beats + r;
          for (int l = 0; l < L; l++) begin
            if (org == RANK_MLR || l == int'(cmd_rank)) begin
              left[l] = beats; nb[l] = 0; rb[l] = bank; rc[l] = col;
            end
          end
          if (org == RANK_MLR) for (int l = 0; l < L; l++) ln[l*W +: W] = model_word(l, bank, col, 0);
          else for (int b = 0; b < 4; b++) ln[b*W +: W] = model_word(int'(cmd_rank), bank, col, b);
          due_v[due] = 1'b1;
          due_rank[due] = (org == RANK_MLR) ? 0 : int'(cmd_rank);
          due_tag[due] = int'(cmd_tag);
          due_line[due] = ln;
        end
        for (int l = 0; l < L; l++) exp_word[l] = nxt_word[l];
      end
      cyc++;
    end
  endtask

  initial begin
    rank_org = RANK_SLR;
    run(RANK_SLR, 150);
    run(RANK_MLR, 80);
    $display("responses %0d, holes %0d", n_resp, n_hole);
    checks++;
    if (n_resp < 100 || n_hole == 0) begin
      failures++;
      $display("FAIL too few responses or no hole");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
