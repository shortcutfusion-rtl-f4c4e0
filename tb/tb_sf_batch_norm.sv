// tb_sf_batch_norm: loads random per-lane scales and biases for a few output
// channel groups through the parameter port, streams random partial-sum
// words with random valid/ready, and compares every output lane with
// psum * scale + bias worked out in the testbench. Also checks that the
// coordinates travel with the data and that nothing is lost or duplicated
// under back-pressure.
module tb_sf_batch_norm;
  import sf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic pwe, in_valid, in_ready, out_valid, out_ready;
  logic [2:0] pog;
  logic [2:0] pidx;
  word_t pdata;
  psum_word_t in_psum;
  logic [7:0] in_og, out_og;
  logic [15:0] in_x, in_y, out_x, out_y;
  logic signed [LANES-1:0][47:0] out_val;
  int checks = 0, failures = 0;
  longint scale [8][64], bias [8][64];
  logic [64*48-1:0] exp_q [$];
  int exp_tag [$];

  sf_batch_norm #(.OG_MAX(8)) dut (.clk, .rst_n, .pwe, .pog, .pidx, .pdata, .in_valid, .in_ready,
    .in_psum, .in_og, .in_x, .in_y, .out_valid, .out_ready, .out_val, .out_og, .out_x, .out_y);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      logic [64*48-1:0] e;
      int tag;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected output");
      end else begin
        e = exp_q.pop_front();
        tag = exp_tag.pop_front();
        if (int'({out_og, out_x[7:0], out_y[7:0]}) != tag) begin
          failures++; $display("FAIL coordinates");
        end
        for (int l = 0; l < 64; l++) if (out_val[l] != e[48*l +: 48]) begin
          failures++;
          if (failures < 10) $display("FAIL lane %0d got %h exp %h", l, out_val[l], e[48*l +: 48]);
          break;
        end
      end
    end
    out_ready <= ($urandom_range(3) != 0);
  end

  initial begin
    pwe = 0; pog = 0; pidx = 0; pdata = '0; in_valid = 0; in_psum = '0; in_og = 0; in_x = 0; in_y = 0;
    out_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int g = 0; g < 8; g++)
      for (int j = 0; j < 6; j++) begin
        @(negedge clk);
        pwe = 1; pog = 3'(g); pidx = 3'(j);
        for (int l = 0; l < 64; l++) begin
          if (j < 2 && l < 32) begin
            pdata[16*l +: 16] = 16'($urandom);
            scale[g][32*j+l] = longint'(signed'(pdata[16*l +: 16]));
          end
          if (j >= 2 && l < 16) begin
            pdata[32*l +: 32] = $urandom;
            bias[g][16*(j-2)+l] = longint'(signed'(pdata[32*l +: 32]));
          end
        end
      end
    @(negedge clk) pwe = 0;
    for (int n = 0; n < 300; n++) begin
      logic [64*48-1:0] e;
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      in_og = 8'($urandom_range(7)); in_x = 16'(n); in_y = 16'($urandom_range(255));
      for (int l = 0; l < 64; l++) begin
        in_psum[32*l +: 32] = $urandom;
        e[48*l +: 48] = 48'(longint'(signed'(in_psum[32*l +: 32])) * scale[in_og][l] + bias[in_og][l]);
      end
      if (in_valid) begin
        // wait for acceptance
        while (!in_ready) @(negedge clk);
        exp_q.push_back(e);
        exp_tag.push_back(int'({in_og, in_x[7:0], in_y[7:0]}));
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (50) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
