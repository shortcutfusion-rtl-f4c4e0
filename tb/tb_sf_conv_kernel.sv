// tb_sf_conv_kernel: checks one CONV kernel (two MAC arrays). Normal mode:
// over several accumulation steps, ch0/ch1 must equal the preset plus the
// 64-input dot products with W0/W1 of every step. Depthwise mode: ch0 is the
// top array's window sum for channel 0 and ch1 the bottom array's for
// channel 1 of a single step; it bypasses the accumulator, so no preset. The result is registered: it is
// checked the cycle after each acc_en step (one step per cycle).
module tb_sf_conv_kernel;
  import sf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic dw_en, acc_en, first;
  logic signed [PSUM_W-1:0] preset0, preset1, ch0, ch1;
  op9_t [2*ARRAY_MAC-1:0] i, w0, w1;
  op9_t [ARRAY_MAC-1:0] i_dw0, w_dw0, i_dw1, w_dw1;
  int checks = 0, failures = 0;

  sf_conv_kernel dut (.clk, .rst_n, .dw_en, .acc_en, .first, .preset0, .preset1,
                      .i, .w0, .w1, .i_dw0, .w_dw0, .i_dw1, .w_dw1, .ch0, .ch1);

  function automatic op9_t r9();
    return op9_t'(int'($urandom_range(510)) - 255);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e0, e1;
    dw_en = 0; acc_en = 0; first = 0; preset0 = 0; preset1 = 0;
    i = '0; w0 = '0; w1 = '0; i_dw0 = '0; w_dw0 = '0; i_dw1 = '0; w_dw1 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      int steps;
      steps = (t % 2) ? 1 : 9;
      @(negedge clk);
      dw_en = t[0];
      preset0 = int'($urandom_range(2000000)) - 1000000;
      preset1 = int'($urandom_range(2000000)) - 1000000;
      // the depthwise result bypasses the accumulator (no preset)
      e0 = dw_en ? 0 : preset0; e1 = dw_en ? 0 : preset1;
      for (int s = 0; s < steps; s++) begin
        for (int k = 0; k < 2 * ARRAY_MAC; k++) begin
          i[k] = r9(); w0[k] = r9(); w1[k] = r9();
          if (!dw_en) begin
            e0 += int'(i[k]) * int'(w0[k]);
            e1 += int'(i[k]) * int'(w1[k]);
          end
        end
        for (int k = 0; k < ARRAY_MAC; k++) begin
          i_dw0[k] = r9(); w_dw0[k] = r9(); i_dw1[k] = r9(); w_dw1[k] = r9();
          if (dw_en) begin
            e0 += int'(i_dw0[k]) * int'(w_dw0[k]);
            e1 += int'(i_dw1[k]) * int'(w_dw1[k]);
          end
        end
        acc_en = 1'b1; first = (s == 0);
        @(negedge clk);
      end
      acc_en = 1'b0;
      checks += 2;
      if (longint'(ch0) != e0 || longint'(ch1) != e1) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d dw=%0d ch0 %0d/%0d ch1 %0d/%0d", t, dw_en, ch0, e0, ch1, e1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
