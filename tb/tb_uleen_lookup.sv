// Self-checking test of a Bloom filter lookup unit (128 entries, so two table
// words): writes a random table, then runs random two-step lookups and checks
// the accumulated response (AND of the two addressed entries), that a result is
// held between lookups, that writes to other filters are ignored, and that
// clearing keep forces the response to 0.
module tb_uleen_lookup;
  import uleen_pkg::*;
  localparam int unsigned E = 128, HW = 7, SM_ID = 3, CLS_ID = 5, F_ID = 17;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  cfg_addr_t cfg_addr;
  logic [CFG_DW-1:0] cfg_wdata;
  logic lk_en = 0, lk_first = 0;
  logic [HW-1:0] addr;
  logic out;
  logic [E-1:0] tbl;
  logic keep = 1;
  int checks = 0, failures = 0;

  uleen_lookup #(.SM_ID(SM_ID), .CLS_ID(CLS_ID), .F_ID(F_ID), .E(E)) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .lk_en_i(lk_en), .lk_first_i(lk_first),
    .addr_i(addr), .out_o(out));
  always #5 clk = !clk;

  task automatic wr(cfg_target_e t, int f, int sub, logic [CFG_DW-1:0] d);
    @(negedge clk);
    cfg_we = 1;
    cfg_addr = '{target: t, sm: CFG_SM_W'(SM_ID), cls: CFG_CLS_W'(CLS_ID), idx: CFG_IDX_W'(f), sub: CFG_SUB_W'(sub)};
    cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic look(int a0, int a1);
    logic e = tbl[a0] & tbl[a1] & keep;
    @(negedge clk);
    lk_en = 1; lk_first = 1; addr = HW'(a0);
    @(negedge clk);
    lk_first = 0; addr = HW'(a1);
    @(negedge clk);
    lk_en = 0; addr = HW'($urandom);
    checks++;
    if (out !== e) begin
      failures++;
      if (failures < 5) $display("lookup %0d,%0d got %b exp %b", a0, a1, out, e);
    end
    @(negedge clk);
    checks++;
    if (out !== e) failures++;   // held
  endtask

  initial begin
    cfg_addr = '0;
    cfg_wdata = '0;
    addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 2; w++) begin
      automatic logic [63:0] d = {$urandom, $urandom};
      tbl[w*64 +: 64] = d;
      wr(CFG_LUT, F_ID, w, d);
      wr(CFG_LUT, F_ID + 1, w, ~d);   // another filter
    end
    for (int n = 0; n < 300; n++) look($urandom % E, $urandom % E);
    keep = 0;
    wr(CFG_KEEP, F_ID, 0, 64'd0);
    for (int n = 0; n < 20; n++) look($urandom % E, $urandom % E);
    keep = 1;
    wr(CFG_KEEP, F_ID, 0, 64'd1);
    for (int n = 0; n < 50; n++) begin
      automatic int a = $urandom % E;
      look(a, a);
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
