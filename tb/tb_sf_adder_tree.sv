// tb_sf_adder_tree: checks the 32-input signed adder tree against a plain
// sum, with random values and with all inputs at the two extremes (so the
// growth of the result width is exercised). Combinational block.
module tb_sf_adder_tree;
  logic signed [31:0][17:0] din;
  logic signed [22:0] sum;
  int checks = 0, failures = 0;

  sf_adder_tree #(.N(32), .IN_W(18)) dut (.din, .sum);

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      int exp;
      exp = 0;
      for (int k = 0; k < 32; k++) begin
        int v;
        case (n)
          0: v = -131072;
          1: v = 131071;
          default: v = int'($urandom_range(262143)) - 131072;
        endcase
        din[k] = 18'(v);
        exp += v;
      end
      #1;
      checks++;
      if (int'(sum) != exp) begin
        failures++;
        if (failures < 10) $display("FAIL sum got %0d exp %0d", sum, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
