// tb_cio_read_ctrl: self-checking test of a layer's read sequencer.
//
// Four sequencers, one per layer position, see the same command stream, as
// in a stack. Frames are four IO cycles. Commands are issued at frame ends,
// at random, only to ranks that are free by the testbench's own bookkeeping.
// For every frame the testbench predicts, per layer, whether a word is fetched
// and its bank / column / beat:
//   SLR: only layer cmd_rank, beats 0..3 in the four frames after the command;
//   MLR: every layer, beat 0 in the frame after the command.
// It also checks the burst lengths (4 frames SLR, 1 frame MLR) and that
// back-to-back bursts to one rank follow without a gap.
module tb_cio_read_ctrl;
  import smla_pkg::*;
  localparam int L = 4;
  logic       clk = 1'b0;
  logic       rst_n;
  logic       frame_tick;
  rank_org_e  rank_org;
  logic       cmd_valid;
  logic [1:0] cmd_rank;
  logic [0:0] cmd_bank;
  logic [5:0] cmd_col;
  logic [L-1:0]      rd_en, busy;
  logic [L-1:0][0:0] g_bank;
  logic [L-1:0][5:0] g_col;
  logic [L-1:0][1:0] g_beat;
  int checks = 0, failures = 0;
  int cyc = 0;
  // reference: remaining beats, next beat, address per layer
  int left[L], nb[L], rb[L], rc[L];
  int backtoback = 0;

  always #5 clk = ~clk;

  for (genvar i = 0; i < L; i++) begin : g
    cio_read_ctrl dut (
      .clk(clk), .rst_n(rst_n), .frame_tick(frame_tick), .rank_org(rank_org),
      .layer_id(2'(i)), .cmd_valid(cmd_valid), .cmd_rank(cmd_rank),
      .cmd_bank(cmd_bank), .cmd_col(cmd_col), .gsa_rd_en(rd_en[i]),
      .gsa_bank(g_bank[i]), .gsa_col(g_col[i]), .gsa_beat(g_beat[i]), .busy(busy[i])
    );
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input rank_org_e org, input int frames);
    rank_org = org;
    rst_n = 1'b0; cmd_valid = 1'b0; frame_tick = 1'b0; cyc = 0;
    for (int l = 0; l < L; l++) begin left[l] = 0; nb[l] = 0; end
    @(posedge clk); #1 rst_n = 1'b1;
    for (int i = 0; i < frames * L; i++) begin
      @(negedge clk);
      frame_tick = (cyc % L) == L - 1;
      cmd_valid  = 1'b0;
      cmd_rank   = 2'($urandom_range(0, L - 1));
      cmd_bank   = 1'($urandom_range(0, 1));
      cmd_col    = 6'($urandom_range(0, 63));
      if (frame_tick && $urandom_range(0, 3) != 0) begin
        if (org == RANK_MLR) cmd_valid = (left[0] <= 1);
        else                 cmd_valid = (left[cmd_rank] <= 1);
      end
      #1;
      for (int l = 0; l < L; l++) begin
        checks++;
        if (rd_en[l] !== (left[l] > 0)) begin
          failures++;
          $display("FAIL org=%0d cyc=%0d layer %0d rd_en=%0b expected %0b", org, cyc, l, rd_en[l], left[l] > 0);
        end else if (left[l] > 0) begin
          checks++;
          if (g_beat[l] !== 2'(nb[l]) || g_bank[l] !== 1'(rb[l]) || g_col[l] !== 6'(rc[l])) begin
            failures++;
            $display("FAIL org=%0d cyc=%0d layer %0d addr %0d/%0d/%0d expected %0d/%0d/%0d",
                     org, cyc, l, g_bank[l], g_col[l], g_beat[l], rb[l], rc[l], nb[l]);
          end
        end
      end
      @(posedge clk);
      if (frame_tick) begin
        int was_last[L];
        for (int l = 0; l < L; l++) begin
          was_last[l] = (left[l] == 1);
          if (left[l] > 0) begin left[l]--; nb[l]++; end
        end
        if (cmd_valid) begin
          for (int l = 0; l < L; l++) begin
            if (org == RANK_MLR || l == int'(cmd_rank)) begin
              if (was_last[l] != 0) backtoback++;
              left[l] = (org == RANK_MLR) ? 1 : 4;
              nb[l] = 0; rb[l] = cmd_bank; rc[l] = cmd_col;
            end
          end
        end
      end
      cyc++;
    end
  endtask

  initial begin
    rank_org = RANK_SLR;
    run(RANK_SLR, 200);
    run(RANK_MLR, 100);
    checks++;
    if (backtoback == 0) begin
      failures++;
      $display("FAIL no back-to-back burst was exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
