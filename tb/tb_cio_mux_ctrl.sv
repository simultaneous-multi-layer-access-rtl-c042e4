// tb_cio_mux_ctrl: exhaustive check of the multiplexer control.
//
// For four-, two- and eight-layer stacks and both clock modes, every layer
// position and counter value is applied and sel_own is compared with the
// slot windows worked out by hand for the chained clock counters:
//   four layers, optimized: layer 0 own at count 0, layer 1 at count 1,
//   layer 2 (half rate) at odd counts, layer 3 (top, quarter rate) always;
//   two layers, optimized: layer 0 at count 0, layer 1 always;
//   identical clocks, and eight layers in either mode: own at count == layer.
module tb_cio_mux_ctrl;
  import smla_pkg::*;
  int checks = 0, failures = 0;

  logic [1:0] cnt4, id4;
  logic [0:0] cnt2, id2;
  logic [2:0] cnt8, id8;
  clk_mode_e  mode;
  logic       own4, own2, own8;

  cio_mux_ctrl #(.NL(4)) dut4 (.cnt(cnt4), .layer_id(id4), .clk_mode(mode), .sel_own(own4));
  cio_mux_ctrl #(.NL(2)) dut2 (.cnt(cnt2), .layer_id(id2), .clk_mode(mode), .sel_own(own2));
  cio_mux_ctrl #(.NL(8)) dut8 (.cnt(cnt8), .layer_id(id8), .clk_mode(mode), .sel_own(own8));

  function automatic bit exp4(int id, int c, bit opt);
    if (!opt) return c == id;
    case (id)
      0: return c == 0;
      1: return c == 1;
      2: return (c % 2) == 1;
      default: return 1'b1;
    endcase
  endfunction

  function automatic bit exp2(int id, int c, bit opt);
    if (!opt) return c == id;
    return (id == 1) ? 1'b1 : (c == 0);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 2; m++) begin
      mode = (m == 1) ? CLK_OPTIMIZED : CLK_IDENTICAL;
      for (int id = 0; id < 8; id++) begin
        for (int c = 0; c < 8; c++) begin
          cnt4 = 2'(c); id4 = 2'(id); cnt2 = 1'(c); id2 = 1'(id);
          cnt8 = 3'(c); id8 = 3'(id);
          #1;
          if (id < 4 && c < 4) begin
            checks++;
            if (own4 !== exp4(id, c, m == 1)) begin
              failures++;
              $display("FAIL NL=4 mode=%0d id=%0d cnt=%0d own=%0b", m, id, c, own4);
            end
          end
          if (id < 2 && c < 2) begin
            checks++;
            if (own2 !== exp2(id, c, m == 1)) begin
              failures++;
              $display("FAIL NL=2 mode=%0d id=%0d cnt=%0d own=%0b", m, id, c, own2);
            end
          end
          checks++;
          if (own8 !== (c == id)) begin
            failures++;
            $display("FAIL NL=8 mode=%0d id=%0d cnt=%0d own=%0b", m, id, c, own8);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
