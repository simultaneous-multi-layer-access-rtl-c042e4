// tb_cio_data_mux: self-checking test of a layer's TSV multiplexers.
//
// Random own words, valid flags, selects and upper-layer data are applied.
// A reference register in the testbench follows the rule "capture the
// global sense amplifier word (or zeros when none was fetched) at the end of
// each frame"; the TSV output must equal that register when sel_own is high
// and the upper-layer data otherwise, in the same cycle (cut-through bypass).
module tb_cio_data_mux;
  localparam int W = 128;
  localparam int L = 4;
  logic         clk = 1'b0;
  logic         rst_n;
  logic         frame_tick, gsa_valid, sel_own, own_valid;
  logic [W-1:0] gsa_data, up_data, down_data;
  logic [W-1:0] ref_q;
  logic         ref_v;
  int           checks = 0, failures = 0;
  int           cyc = 0;

  always #5 clk = ~clk;

  cio_data_mux #(.W(W)) dut (
    .clk(clk), .rst_n(rst_n), .frame_tick(frame_tick), .gsa_valid(gsa_valid),
    .gsa_data(gsa_data), .sel_own(sel_own), .up_data(up_data),
    .down_data(down_data), .own_valid(own_valid)
  );

  function automatic logic [W-1:0] rnd_word();
    logic [W-1:0] w;
    for (int i = 0; i < W / 32; i++) w[i*32 +: 32] = $urandom;
    return w;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; frame_tick = 1'b0; gsa_valid = 1'b0; sel_own = 1'b0;
    gsa_data = '0; up_data = '0; ref_q = '0; ref_v = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < 800; i++) begin
      @(negedge clk);
      frame_tick = (cyc % L) == L - 1;
      gsa_valid  = 1'($urandom_range(0, 3) != 0);
      gsa_data   = rnd_word();
      up_data    = rnd_word();
      sel_own    = 1'($urandom_range(0, 1));
      #1;
      checks++;
      if (down_data !== (sel_own ? ref_q : up_data) || own_valid !== ref_v) begin
        failures++;
        $display("FAIL cycle %0d sel_own=%0b", cyc, sel_own);
      end
      @(posedge clk);
      if (frame_tick) begin
        ref_q = gsa_valid ? gsa_data : '0;
        ref_v = gsa_valid;
      end
      cyc++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
