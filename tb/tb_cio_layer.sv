// tb_cio_layer: self-checking test of one Cascaded-IO layer in isolation.
//
// For every stack position of a four-layer stack and both clock schemes the
// testbench plays the layers around the device: it supplies the clock edges
// the layer below would hand up (every IO cycle; with optimized clocks slots
// 0 and 2 for position 2 and slot 0 for position 3), random data from the
// layer above, a DRAM core model and random reads. It checks, slot by slot,
// the clock edges handed upward, the own/bypass select against the windows
// worked out by hand (identical: slot == position; optimized: position 0 in
// slot 0, 1 in slot 1, 2 in slots 1-2, 3 always) and the TSV data going down:
// the layer's fetched word in its window, the upper data otherwise.
module tb_cio_layer;
  import smla_pkg::*;
  localparam int L = 4;
  localparam int W = 128;
  logic clk = 1'b0;
  logic rst_n;
  logic [1:0] layer_id;
  clk_mode_e clk_mode;
  rank_org_e rank_org;
  logic tick_in, tick_out, frame_tick;
  logic [1:0] cnt;
  logic cmd_valid;
  logic [1:0] cmd_rank;
  logic [0:0] cmd_bank;
  logic [5:0] cmd_col;
  logic gsa_rd_en;
  logic [0:0] gsa_bank;
  logic [5:0] gsa_col;
  logic [1:0] gsa_beat;
  logic [W-1:0] gsa_data, up_data, down_data;
  logic sel_own, own_valid, busy;
  int checks = 0, failures = 0;
  int cyc, left, nb, rb, rc;
  logic [W-1:0] own_word, nxt;

  always #5 clk = ~clk;

  cio_layer dut (
    .clk(clk), .rst_n(rst_n), .layer_id(layer_id), .clk_mode(clk_mode), .rank_org(rank_org),
    .tick_in(tick_in), .tick_out(tick_out), .frame_tick(frame_tick), .cnt(cnt),
    .cmd_valid(cmd_valid), .cmd_rank(cmd_rank), .cmd_bank(cmd_bank), .cmd_col(cmd_col),
    .gsa_rd_en(gsa_rd_en), .gsa_bank(gsa_bank), .gsa_col(gsa_col), .gsa_beat(gsa_beat),
    .gsa_data(gsa_data), .up_data(up_data), .down_data(down_data),
    .sel_own(sel_own), .own_valid(own_valid), .busy(busy)
  );

  function automatic logic [W-1:0] model_word(int bank, int col, int beat);
    logic [W-1:0] w;
    for (int i = 0; i < W / 32; i++)
      w[i*32 +: 32] = 32'(32'h85EBCA6B * (bank * 7919 + col * 131 + beat * 17 + i + 3)) ^ 32'(i << 20);
    return w;
  endfunction

  assign gsa_data = model_word(int'(gsa_bank), int'(gsa_col), int'(gsa_beat));

  function automatic bit exp_tick_in(int id, bit opt, int s);
    if (!opt || id < 2) return 1'b1;
    if (id == 2) return (s % 2) == 0;
    return s == 0;
  endfunction

  function automatic bit exp_tick_out(int id, bit opt, int s);
    if (!opt || id == 0) return 1'b1;
    if (id == 1) return (s % 2) == 0;
    return s == 0;
  endfunction

  function automatic bit exp_own(int id, bit opt, int s);
    if (!opt) return s == id;
    case (id)
      0: return s == 0;
      1: return s == 1;
      2: return s == 1 || s == 2;
      default: return 1'b1;
    endcase
  endfunction

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int id, input clk_mode_e cm, input rank_org_e org, input int frames);
    bit opt;
    opt = (cm == CLK_OPTIMIZED);
    layer_id = 2'(id); clk_mode = cm; rank_org = org;
    rst_n = 1'b0; cmd_valid = 1'b0; tick_in = 1'b0; frame_tick = 1'b0; up_data = '0;
    cyc = 0; left = 0; nb = 0; own_word = '0;
    @(posedge clk); #1 rst_n = 1'b1;
    for (int i = 0; i < frames * L; i++) begin
      int s;
      s = cyc % L;
      @(negedge clk);
      tick_in    = exp_tick_in(id, opt, s);
      frame_tick = (s == L - 1);
      for (int k = 0; k < W / 32; k++) up_data[k*32 +: 32] = $urandom;
      cmd_rank  = 2'($urandom_range(0, L - 1));
      cmd_bank  = 1'($urandom_range(0, 1));
      cmd_col   = 6'($urandom_range(0, 63));
      cmd_valid = frame_tick && ($urandom_range(0, 2) != 0) && (left <= 1 || (org == RANK_SLR && int'(cmd_rank) != id));
      #1;
      checks += 3;
      if (tick_out !== exp_tick_out(id, opt, s)) begin
        failures++;
        $display("FAIL id=%0d opt=%0b slot %0d tick_out=%0b", id, opt, s, tick_out);
      end
      if (sel_own !== exp_own(id, opt, s)) begin
        failures++;
        $display("FAIL id=%0d opt=%0b slot %0d sel_own=%0b", id, opt, s, sel_own);
      end
      if (down_data !== (exp_own(id, opt, s) ? own_word : up_data)) begin
        failures++;
        $display("FAIL id=%0d opt=%0b slot %0d down_data wrong", id, opt, s);
      end
      @(posedge clk);
      if (frame_tick) begin
        nxt = (left > 0) ? model_word(rb, rc, nb) : '0;
        if (left > 0) begin left--; nb++; end
        if (cmd_valid && (org == RANK_MLR || int'(cmd_rank) == id)) begin
          left = (org == RANK_MLR) ? 1 : 4; nb = 0; rb = cmd_bank; rc = cmd_col;
        end
        own_word = nxt;
      end
      cyc++;
    end
  endtask

  initial begin
    layer_id = '0; clk_mode = CLK_IDENTICAL; rank_org = RANK_SLR;
    for (int id = 0; id < L; id++) begin
      run(id, CLK_IDENTICAL, RANK_SLR, 40);
      run(id, CLK_OPTIMIZED, RANK_SLR, 40);
      run(id, CLK_OPTIMIZED, RANK_MLR, 20);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
