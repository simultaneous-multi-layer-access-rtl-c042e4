// tb_cio_clk_counter: self-checking test of the per-layer clock counter.
//
// Drives random incoming clock edges (tick_in) and a divide enable and
// compares the count and the clock handed upward with a reference counter
// kept in the testbench. Also checks the rates: with div_en set and an edge
// every IO cycle, the upper clock ticks every second cycle; two counters in a
// chain, both dividing, give a quarter-rate clock.
module tb_cio_clk_counter;
  logic       clk = 1'b0;
  logic       rst_n;
  logic       tick_in, div_en;
  logic [1:0] cnt;
  logic       tick_out;
  logic [1:0] cnt2;
  logic       tick_out2;
  int         checks = 0, failures = 0;
  int unsigned ref_cnt;

  always #5 clk = ~clk;

  cio_clk_counter #(.CW(2)) dut (
    .clk(clk), .rst_n(rst_n), .tick_in(tick_in), .div_en(div_en),
    .cnt(cnt), .tick_out(tick_out)
  );
  // second counter fed by the first, as the next layer up would be
  cio_clk_counter #(.CW(2)) dut2 (
    .clk(clk), .rst_n(rst_n), .tick_in(tick_out), .div_en(div_en),
    .cnt(cnt2), .tick_out(tick_out2)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: cnt=%0d ref=%0d tick_in=%0b div_en=%0b tick_out=%0b",
               what, cnt, ref_cnt, tick_in, div_en, tick_out);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_up, n_up2;
    rst_n = 1'b0; tick_in = 1'b0; div_en = 1'b0; ref_cnt = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // random edges, random divide enable
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      tick_in = 1'($urandom_range(0, 1));
      div_en  = (i % 100) < 50;
      #1;
      check(cnt == 2'(ref_cnt), "count");
      check(tick_out == (tick_in && (!div_en || (ref_cnt % 2 == 0))), "tick_out");
      @(posedge clk);
      if (tick_in) ref_cnt = (ref_cnt + 1) % 4;
    end
    // rates: an edge every cycle
    rst_n = 1'b0; #1 rst_n = 1'b1;
    @(negedge clk);
    tick_in = 1'b1; div_en = 1'b1; n_up = 0; n_up2 = 0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      n_up  += tick_out;
      n_up2 += tick_out2;
    end
    check(n_up == 32, "half rate");
    check(n_up2 == 16, "quarter rate");
    div_en = 1'b0; n_up = 0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      n_up += tick_out;
    end
    check(n_up == 64, "pass-through rate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
