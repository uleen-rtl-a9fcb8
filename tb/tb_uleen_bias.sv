// Self-checking test of the bias adders: writes random signed biases (and
// writes to other targets, which must be ignored), then checks that each
// registered response equals count + bias as a signed number.
module tb_uleen_bias;
  import uleen_pkg::*;
  localparam int unsigned M = 10, CNT_W = 11;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  cfg_addr_t cfg_addr;
  logic [CFG_DW-1:0] cfg_wdata;
  logic load = 0;
  logic [M-1:0][CNT_W-1:0] cnt;
  resp_t [M-1:0] resp;
  int bias_ref [M];
  int checks = 0, failures = 0;

  uleen_bias #(.M(M), .CNT_W(CNT_W)) dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
    .load_i(load), .cnt_i(cnt), .resp_o(resp));
  always #5 clk = !clk;

  task automatic wr(cfg_target_e t, int cls, logic [CFG_DW-1:0] d);
    @(negedge clk);
    cfg_we = 1;
    cfg_addr = '{target: t, sm: '0, cls: CFG_CLS_W'(cls), idx: '0, sub: '0};
    cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic run();
    @(negedge clk);
    load = 1;
    for (int c = 0; c < M; c++) cnt[c] = CNT_W'($urandom);
    @(negedge clk);
    load = 0;
    for (int c = 0; c < M; c++) begin
      checks++;
      if (int'(resp[c]) != int'(cnt[c]) + bias_ref[c]) begin
        failures++;
        if (failures < 5) $display("class %0d got %0d exp %0d", c, resp[c], int'(cnt[c]) + bias_ref[c]);
      end
    end
  endtask

  initial begin
    cfg_addr = '0;
    cfg_wdata = '0;
    cnt = '0;
    for (int c = 0; c < M; c++) bias_ref[c] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run();
    for (int n = 0; n < 100; n++) begin
      automatic int c = $urandom % M;
      automatic int b = int'($urandom % 601) - 300;
      if (n % 5 == 0) wr(CFG_LUT, c, CFG_DW'(b));
      else begin
        wr(CFG_BIAS, c, CFG_DW'(b));
        bias_ref[c] = b;
      end
      run();
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
