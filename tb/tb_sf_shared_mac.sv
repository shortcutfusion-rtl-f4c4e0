// tb_sf_shared_mac: checks the DSP-packed shared MAC. Random 9-bit signed
// operands, including the extremes -255 and 255, are applied in normal mode
// (two products I*W0 and I*W1 from one multiplier) and in depthwise mode
// (one product I_DW*W_DW); both outputs are compared with products computed
// directly. The block is combinational, so results are sampled after a short
// delay.
module tb_sf_shared_mac;
  import sf_pkg::*;
  logic dw_en;
  op9_t i, i_dw, w0, w_dw, w1;
  logic signed [17:0] mult0, mult1;
  int checks = 0, failures = 0;

  sf_shared_mac dut (.dw_en, .i, .i_dw, .w0, .w_dw, .w1, .mult0, .mult1);

  function automatic op9_t r9();
    int v;
    case ($urandom_range(5))
      0: v = -255;
      1: v = 255;
      default: v = int'($urandom_range(510)) - 255;
    endcase
    return op9_t'(v);
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 4000; n++) begin
      dw_en = n[0];
      i = r9(); i_dw = r9(); w0 = r9(); w_dw = r9(); w1 = r9();
      #1;
      if (!dw_en) begin
        check("normal mult0", int'(mult0), int'(i) * int'(w0));
        check("normal mult1", int'(mult1), int'(i) * int'(w1));
      end else begin
        check("depthwise mult0", int'(mult0), int'(i_dw) * int'(w_dw));
        check("depthwise mult1", int'(mult1), 0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
