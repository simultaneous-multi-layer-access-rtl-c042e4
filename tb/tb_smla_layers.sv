// tb_smla_layers: end-to-end test of the channel at the other stack heights
// evaluated for Cascaded-IO, two and eight layers (IO clock 2x and 8x the
// baseline clock), with 128 TSVs and 64-byte lines as in the default.
//
// Two checking harnesses (tb_smla_layers_run) run side by side, one per
// height. The two-layer stack runs all four combinations of SLR / MLR and
// identical / optimized clocks; the eight-layer stack runs SLR with identical
// clocks, the combination this design supports at that height. Each harness
// checks cmd_ready, every response's rank, tag, data and IO cycle, and the
// throughput of a saturating stream. Mechanisms that must occur at each
// height: responses, bypass of lower layers, holes, commands held back by a
// busy rank, back-to-back bursts, and (two layers) divided clocks.
module tb_smla_layers;
  int checks = 0, failures = 0;
  logic done2, done8;
  int c2, f2, r2, by2, h2, st2, bb2, dv2, ph2;
  int c8, f8, r8, by8, h8, st8, bb8, dv8, ph8;

  tb_smla_layers_run #(.L(2)) u_l2 (
    .done(done2), .checks(c2), .failures(f2), .n_resp(r2), .n_bypass(by2), .n_hole(h2),
    .n_stall(st2), .n_b2b(bb2), .n_div(dv2), .n_phase(ph2));
  tb_smla_layers_run #(.L(8)) u_l8 (
    .done(done8), .checks(c8), .failures(f8), .n_resp(r8), .n_bypass(by8), .n_hole(h8),
    .n_stall(st8), .n_b2b(bb8), .n_div(dv8), .n_phase(ph8));

  initial begin
    #400000;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c2 + c8 + 1, f2 + f8 + 1);
    $finish;
  end

  initial begin
    #1;
    wait (done2 && done8);
    checks   = c2 + c8;
    failures = f2 + f8;
    $display("2 layers: phases %0d responses %0d bypass %0d holes %0d stalls %0d back-to-back %0d divided-clock cycles %0d",
             ph2, r2, by2, h2, st2, bb2, dv2);
    $display("8 layers: phases %0d responses %0d bypass %0d holes %0d stalls %0d back-to-back %0d divided-clock cycles %0d",
             ph8, r8, by8, h8, st8, bb8, dv8);
    checks += 2;
    if (ph2 != 4 || r2 < 60 || by2 == 0 || h2 == 0 || st2 == 0 || bb2 == 0 || dv2 == 0) begin
      failures++;
      $display("FAIL a two-layer mechanism never happened");
    end
    if (ph8 != 1 || r8 < 40 || by8 == 0 || h8 == 0 || st8 == 0 || bb8 == 0) begin
      failures++;
      $display("FAIL an eight-layer mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
