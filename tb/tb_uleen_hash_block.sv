// Self-checking test of a submodel hash block at a small size (30 sample bits,
// 4-input filters, 2 hash functions, 3 issue cycles): loads random H3
// parameters, presents random samples, runs the issue sequence and compares
// every entry of the partials buffer with a reference computed here from the
// documented reordering formula and the H3 definition. Also checks that the
// buffer is complete exactly one cycle after the last issue cycle.
module tb_uleen_hash_block;
  import uleen_pkg::*;
  localparam int unsigned SM_ID = 1, TOT = 30, N_IN = 4, HW = 3, K = 2, HC = 3;
  localparam int unsigned N_F = (TOT + N_IN - 1) / N_IN;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  cfg_addr_t cfg_addr;
  logic [CFG_DW-1:0] cfg_wdata;
  logic [TOT-1:0] sample;
  logic issue = 0;
  logic [1:0] issue_cyc = 0;
  logic [N_F-1:0][K-1:0][HW-1:0] partials;
  logic [K-1:0][N_IN-1:0][HW-1:0] prm;
  logic [TOT-1:0] used;
  int checks = 0, failures = 0;

  uleen_hash_block #(.SM_ID(SM_ID), .TOT(TOT), .N_IN(N_IN), .HW(HW), .K(K), .HC(HC)) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .sample_i(sample), .issue_i(issue),
    .issue_cyc_i(issue_cyc), .partials_o(partials));
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

  function automatic logic [HW-1:0] ref_hash(int f, int k);
    logic [HW-1:0] h = '0;
    for (int b = 0; b < N_IN; b++) begin
      int unsigned pos = f * N_IN + b;
      logic bit_v = (pos < TOT) ? used[(mult() * pos + 11 * SM_ID + 5) % TOT] : 1'b0;
      if (bit_v) h ^= prm[k][b];
    end
    return h;
  endfunction

  initial begin
    cfg_addr = '0;
    cfg_wdata = '0;
    sample = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < K; k++)
      for (int i = 0; i < N_IN; i++) begin
        prm[k][i] = HW'($urandom);
        @(negedge clk);
        cfg_we = 1;
        cfg_addr = '{target: CFG_HASH, sm: CFG_SM_W'(SM_ID), cls: '0, idx: CFG_IDX_W'(i), sub: CFG_SUB_W'(k)};
        cfg_wdata = CFG_DW'(prm[k][i]);
      end
    @(negedge clk) cfg_we = 0;
    for (int n = 0; n < 50; n++) begin
      @(negedge clk);
      for (int i = 0; i < TOT; i++) sample[i] = 1'($urandom);
      used = sample;
      for (int c = 0; c < HC; c++) begin
        @(negedge clk);
        issue = 1;
        issue_cyc = 2'(c);
      end
      @(negedge clk);
      issue = 0;
      issue_cyc = 2'($urandom % HC);
      for (int i = 0; i < TOT; i++) sample[i] = 1'($urandom);  // no longer read
      @(posedge clk);
      #1;
      for (int f = 0; f < N_F; f++)
        for (int k = 0; k < K; k++) begin
          checks++;
          if (partials[f][k] !== ref_hash(f, k)) begin
            failures++;
            if (failures < 5) $display("f%0d k%0d got %h exp %h", f, k, partials[f][k], ref_hash(f, k));
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
