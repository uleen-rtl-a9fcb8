// Self-checking test of one submodel at a small size (24 sample bits, 5-input
// filters so the last filter is padded, 32 entries, 3 classes, K = 2, 2 issue
// cycles): loads random hash parameters, tables and pruning flags, then for
// random samples runs the hash issue cycles, the drain cycle and the two lookup
// steps, and compares every filter response of every class with a reference
// computed here from the reordering formula, H3 and the Bloom filter rule.
module tb_uleen_submodel;
  import uleen_pkg::*;
  localparam int unsigned SM_ID = 3, TOT = 24, N_IN = 5, E = 32, K = 2, HC = 2, M = 3, HW = 5;
  localparam int unsigned N_F = (TOT + N_IN - 1) / N_IN;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  cfg_addr_t cfg_addr = '0;
  logic [CFG_DW-1:0] cfg_wdata = '0;
  logic [TOT-1:0] sample = '0;
  logic issue = 0, lk_en = 0, lk_k = 0;
  logic issue_cyc = 0;
  logic [M-1:0][N_F-1:0] resp;
  logic [E-1:0] tbl [M][N_F];
  bit keep [M][N_F];
  logic [HW-1:0] prm [K][N_IN];
  int checks = 0, failures = 0;

  uleen_submodel #(.SM_ID(SM_ID), .TOT(TOT), .N_IN(N_IN), .E(E), .K(K), .HC(HC), .M(M)) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .sample_i(sample), .issue_i(issue),
    .issue_cyc_i(issue_cyc), .lk_en_i(lk_en), .lk_k_i(lk_k), .resp_o(resp));
  always #5 clk = !clk;

  function automatic int unsigned mult();
    int unsigned a = TOT / 3 + 97 * SM_ID + 1, x, y, t;
    forever begin
      x = a % TOT; y = TOT;
      while (y != 0) begin t = x % y; x = y; y = t; end
      if (x == 1) return a % TOT;
      a++;
    end
  endfunction

  task automatic cfg(cfg_target_e t, int c, int idx, int sub, logic [CFG_DW-1:0] d);
    @(negedge clk);
    cfg_we = 1;
    cfg_addr = '{target: t, sm: CFG_SM_W'(SM_ID), cls: CFG_CLS_W'(c), idx: CFG_IDX_W'(idx), sub: CFG_SUB_W'(sub)};
    cfg_wdata = d;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < K; k++)
      for (int i = 0; i < N_IN; i++) begin
        prm[k][i] = HW'($urandom);
        cfg(CFG_HASH, 0, i, k, CFG_DW'(prm[k][i]));
      end
    for (int c = 0; c < M; c++)
      for (int f = 0; f < N_F; f++) begin
        tbl[c][f] = E'($urandom);
        keep[c][f] = ($urandom % 4 != 0);
        cfg(CFG_LUT, c, f, 0, CFG_DW'(tbl[c][f]));
        cfg(CFG_KEEP, c, f, 0, CFG_DW'(keep[c][f]));
      end
    @(negedge clk) cfg_we = 0;
    for (int n = 0; n < 100; n++) begin
      logic [HW-1:0] h [N_F][K];
      for (int i = 0; i < TOT; i++) sample[i] = 1'($urandom);
      for (int f = 0; f < N_F; f++)
        for (int k = 0; k < K; k++) begin
          h[f][k] = '0;
          for (int b = 0; b < N_IN; b++)
            if (f * N_IN + b < TOT && sample[(mult() * (f * N_IN + b) + 11 * SM_ID + 5) % TOT]) h[f][k] ^= prm[k][b];
        end
      for (int c = 0; c < HC; c++) begin
        @(negedge clk);
        issue = 1;
        issue_cyc = 1'(c);
      end
      @(negedge clk) issue = 0;            // drain
      @(negedge clk) begin lk_en = 1; lk_k = 0; end
      @(negedge clk) lk_k = 1;
      @(negedge clk) lk_en = 0;
      for (int c = 0; c < M; c++)
        for (int f = 0; f < N_F; f++) begin
          automatic logic e = keep[c][f] & tbl[c][f][h[f][0]] & tbl[c][f][h[f][1]];
          checks++;
          if (resp[c][f] !== e) begin
            failures++;
            if (failures < 5) $display("class %0d filter %0d got %b exp %b", c, f, resp[c][f], e);
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
