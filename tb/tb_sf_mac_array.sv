// tb_sf_mac_array: checks one array of 32 shared MACs with its two adder
// trees. In normal mode out0 must be sum(I*W0) and out1 sum(I*W1) over the
// 32 lanes; in depthwise mode out0 is sum(I_DW*W_DW) and out1 is zero.
// Combinational block.
module tb_sf_mac_array;
  import sf_pkg::*;
  logic dw_en;
  op9_t [ARRAY_MAC-1:0] i, w0, w1, i_dw, w_dw;
  logic signed [22:0] out0, out1;
  int checks = 0, failures = 0;

  sf_mac_array dut (.dw_en, .i, .w0, .w1, .i_dw, .w_dw, .out0, .out1);

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      int e0, e1;
      e0 = 0; e1 = 0;
      dw_en = n[0];
      for (int k = 0; k < ARRAY_MAC; k++) begin
        i[k] = op9_t'(int'($urandom_range(510)) - 255);
        w0[k] = op9_t'(int'($urandom_range(510)) - 255);
        w1[k] = op9_t'(int'($urandom_range(510)) - 255);
        i_dw[k] = op9_t'(int'($urandom_range(510)) - 255);
        w_dw[k] = op9_t'(int'($urandom_range(510)) - 255);
        if (dw_en) e0 += int'(i_dw[k]) * int'(w_dw[k]);
        else begin
          e0 += int'(i[k]) * int'(w0[k]);
          e1 += int'(i[k]) * int'(w1[k]);
        end
      end
      #1;
      checks += 2;
      if (int'(out0) != e0 || int'(out1) != e1) begin
        failures++;
        if (failures < 10) $display("FAIL dw=%0d out0 %0d/%0d out1 %0d/%0d", dw_en, out0, e0, out1, e1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
