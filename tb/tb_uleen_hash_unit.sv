// Self-checking test of the H3 hash unit: random inputs and parameters are
// applied every cycle and each result, one cycle later, is compared with the
// XOR of the parameters selected by the set input bits. Also checks a few
// fixed cases (all zero input gives 0, a one-hot input gives its parameter).
module tb_uleen_hash_unit;
  localparam int unsigned N_IN = 12, HW = 6;
  logic clk = 0;
  logic [N_IN-1:0] x;
  logic [N_IN-1:0][HW-1:0] p;
  logic [HW-1:0] h;
  logic [HW-1:0] exp_q;
  int checks = 0, failures = 0;

  uleen_hash_unit #(.N_IN(N_IN), .HW(HW)) dut (.clk, .x_i(x), .param_i(p), .hash_o(h));
  always #5 clk = !clk;

  function automatic logic [HW-1:0] ref_h(logic [N_IN-1:0] xi, logic [N_IN-1:0][HW-1:0] pi);
    logic [HW-1:0] r = '0;
    for (int i = 0; i < N_IN; i++) if (xi[i]) r = r ^ pi[i];
    return r;
  endfunction

  task automatic apply(logic [N_IN-1:0] xi, logic [N_IN-1:0][HW-1:0] pi);
    @(negedge clk);
    x = xi;
    p = pi;
    exp_q = ref_h(xi, pi);
    @(negedge clk);
    checks++;
    if (h !== exp_q) begin
      failures++;
      if (failures < 5) $display("x=%h got %h exp %h", xi, h, exp_q);
    end
  endtask

  initial begin
    logic [N_IN-1:0][HW-1:0] rp;
    for (int i = 0; i < N_IN; i++) rp[i] = HW'($urandom);
    apply('0, rp);
    checks++;
    if (h !== '0) failures++;
    for (int i = 0; i < N_IN; i++) begin
      apply(N_IN'(1) << i, rp);
      checks++;
      if (h !== rp[i]) failures++;
    end
    for (int n = 0; n < 500; n++) begin
      for (int i = 0; i < N_IN; i++) rp[i] = HW'($urandom);
      apply(N_IN'($urandom), rp);
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
