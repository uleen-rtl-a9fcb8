// Self-checking test of the argmax: random signed responses (positive and
// negative, with forced ties) for 10 classes; the registered index must be that
// of the largest response, the lowest such index on a tie, and must hold while
// load is low.
module tb_uleen_argmax;
  import uleen_pkg::*;
  localparam int unsigned M = 10;
  logic clk = 0, load = 0;
  resp_t [M-1:0] resp;
  logic [3:0] cls;
  int checks = 0, failures = 0, ties = 0;

  uleen_argmax #(.M(M)) dut (.clk, .load_i(load), .resp_i(resp), .class_o(cls));
  always #5 clk = !clk;

  initial begin
    for (int n = 0; n < 500; n++) begin
      int best, bi;
      @(negedge clk);
      load = 1;
      for (int c = 0; c < M; c++) resp[c] = resp_t'(int'($urandom % 2001) - 1000);
      if (n % 3 == 0) begin
        resp[$urandom % M] = 16'sd1200;
        resp[$urandom % M] = 16'sd1200;
      end
      best = -100000; bi = 0;
      for (int c = 0; c < M; c++) if (int'(resp[c]) > best) begin best = int'(resp[c]); bi = c; end
      for (int c = 0; c < M; c++) if (c != bi && int'(resp[c]) == best) ties++;
      @(negedge clk);
      load = 0;
      resp = '0;
      @(negedge clk);
      checks++;
      if (int'(cls) != bi) begin
        failures++;
        if (failures < 5) $display("got %0d exp %0d", cls, bi);
      end
    end
    checks++;
    if (ties == 0) failures++;
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
