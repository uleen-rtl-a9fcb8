// Self-checking test of the hash parameter register file: checks reset to zero,
// then writes random parameters (including writes addressed to another
// submodel and to other targets, which must be ignored) and reads every entry
// back against a reference copy.
module tb_uleen_param_rf;
  import uleen_pkg::*;
  localparam int unsigned SM_ID = 2, N_IN = 8, HW = 5, K = 2;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  cfg_addr_t cfg_addr;
  logic [CFG_DW-1:0] cfg_wdata;
  logic [K-1:0][N_IN-1:0][HW-1:0] param, ref_p;
  int checks = 0, failures = 0;

  uleen_param_rf #(.SM_ID(SM_ID), .N_IN(N_IN), .HW(HW), .K(K)) dut (.*, .param_o(param));
  always #5 clk = !clk;

  task automatic wr(cfg_target_e t, int sm, int idx, int sub, logic [CFG_DW-1:0] d);
    @(negedge clk);
    cfg_we = 1;
    cfg_addr = '{target: t, sm: CFG_SM_W'(sm), cls: '0, idx: CFG_IDX_W'(idx), sub: CFG_SUB_W'(sub)};
    cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic compare();
    for (int k = 0; k < K; k++)
      for (int i = 0; i < N_IN; i++) begin
        checks++;
        if (param[k][i] !== ref_p[k][i]) begin
          failures++;
          if (failures < 5) $display("k%0d i%0d got %h exp %h", k, i, param[k][i], ref_p[k][i]);
        end
      end
  endtask

  initial begin
    cfg_addr = '0;
    cfg_wdata = '0;
    ref_p = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    compare();
    for (int n = 0; n < 300; n++) begin
      automatic int k = $urandom % K, i = $urandom % N_IN, sel = $urandom % 4;
      automatic logic [CFG_DW-1:0] d = {$urandom, $urandom};
      if (sel == 0)      wr(CFG_HASH, SM_ID + 1, i, k, d);   // other submodel
      else if (sel == 1) wr(CFG_LUT, SM_ID, i, k, d);        // other target
      else begin
        wr(CFG_HASH, SM_ID, i, k, d);
        ref_p[k][i] = d[HW-1:0];
      end
      compare();
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
