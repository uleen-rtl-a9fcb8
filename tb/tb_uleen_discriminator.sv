// Self-checking test of a discriminator (20 filters of 16 entries, K = 2):
// loads random tables and pruning flags, drives random hash results and the
// two lookup steps, and compares each filter response with the AND of its two
// addressed table bits (0 for a pruned filter).
module tb_uleen_discriminator;
  import uleen_pkg::*;
  localparam int unsigned SM_ID = 0, CLS_ID = 2, N_F = 20, E = 16, K = 2, HW = 4;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  cfg_addr_t cfg_addr;
  logic [CFG_DW-1:0] cfg_wdata;
  logic [N_F-1:0][K-1:0][HW-1:0] partials;
  logic lk_en = 0;
  logic lk_k = 0;
  logic [N_F-1:0] resp;
  logic [N_F-1:0][E-1:0] tbl;
  logic [N_F-1:0] keep;
  int checks = 0, failures = 0;

  uleen_discriminator #(.SM_ID(SM_ID), .CLS_ID(CLS_ID), .N_F(N_F), .E(E), .K(K)) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .partials_i(partials), .lk_en_i(lk_en),
    .lk_k_i(lk_k), .resp_o(resp));
  always #5 clk = !clk;

  task automatic wr(cfg_target_e t, int f, logic [CFG_DW-1:0] d);
    @(negedge clk);
    cfg_we = 1;
    cfg_addr = '{target: t, sm: CFG_SM_W'(SM_ID), cls: CFG_CLS_W'(CLS_ID), idx: CFG_IDX_W'(f), sub: '0};
    cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    cfg_addr = '0;
    cfg_wdata = '0;
    partials = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < N_F; f++) begin
      tbl[f] = E'($urandom);
      keep[f] = ($urandom % 4 != 0);
      wr(CFG_LUT, f, CFG_DW'(tbl[f]));
      wr(CFG_KEEP, f, CFG_DW'(keep[f]));
    end
    for (int n = 0; n < 100; n++) begin
      logic [N_F-1:0] e;
      @(negedge clk);
      for (int f = 0; f < N_F; f++)
        for (int k = 0; k < K; k++) partials[f][k] = HW'($urandom);
      for (int f = 0; f < N_F; f++) e[f] = keep[f] & tbl[f][partials[f][0]] & tbl[f][partials[f][1]];
      lk_en = 1; lk_k = 0;
      @(negedge clk) lk_k = 1;
      @(negedge clk) lk_en = 0;
      for (int f = 0; f < N_F; f++) begin
        checks++;
        if (resp[f] !== e[f]) begin
          failures++;
          if (failures < 5) $display("filter %0d got %b exp %b", f, resp[f], e[f]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
