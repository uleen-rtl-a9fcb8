// Self-checking test of the popcount adder trees: random bit vectors with
// random densities (including all zeros and all ones) for 4 classes of 37 bits;
// each registered count is compared with a bit-by-bit count, and the register
// must hold while load is low.
module tb_uleen_popcount;
  localparam int unsigned M = 4, WIDTH = 37, CNT_W = 6;
  logic clk = 0, load = 0;
  logic [M-1:0][WIDTH-1:0] bits;
  logic [M-1:0][CNT_W-1:0] cnt;
  int exp_c [M];
  int checks = 0, failures = 0;

  uleen_popcount #(.M(M), .WIDTH(WIDTH)) dut (.clk, .load_i(load), .bits_i(bits), .cnt_o(cnt));
  always #5 clk = !clk;

  initial begin
    for (int n = 0; n < 300; n++) begin
      automatic int dens = $urandom % 5;
      @(negedge clk);
      load = 1;
      for (int c = 0; c < M; c++) begin
        exp_c[c] = 0;
        for (int i = 0; i < WIDTH; i++) begin
          bits[c][i] = (n == 0) ? 1'b0 : (n == 1) ? 1'b1 : (($urandom % 4) < dens);
          if (bits[c][i]) exp_c[c]++;
        end
      end
      @(negedge clk);
      load = 0;
      bits = ~bits;
      @(negedge clk);
      for (int c = 0; c < M; c++) begin
        checks++;
        if (int'(cnt[c]) != exp_c[c]) begin
          failures++;
          if (failures < 5) $display("class %0d got %0d exp %0d", c, cnt[c], exp_c[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
