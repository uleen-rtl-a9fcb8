// Self-checking test of the lockstep controller (HC = 3 issue cycles, K = 2):
// with a sample always available and the output always ready it checks the
// issue sequence 0,1,2, the release on the last issue cycle, the drain cycle,
// the lookup steps 0,1, a sample period of HC+1+K = 6 cycles and a latency of 7
// cycles from release to out_valid. Then the output is held off at random: the
// controller must stall, never overwrite an untaken result, and deliver one
// result per released sample.
module tb_uleen_ctrl;
  localparam int unsigned HC = 3, K = 2;
  logic clk = 0, rst_n = 0;
  logic sample_valid = 0, sample_release, issue, lk_en, pop_load, bias_load, out_load;
  logic out_valid, out_ready = 1, stall;
  logic [1:0] issue_cyc;
  logic lk_k;
  int checks = 0, failures = 0;
  int cyc = 0, first_out = -1, released = 0, delivered = 0, stalls = 0;
  int rel_times [$];

  uleen_ctrl #(.HC(HC), .K(K)) dut (.clk, .rst_n, .sample_valid_i(sample_valid),
    .sample_release_o(sample_release), .issue_o(issue), .issue_cyc_o(issue_cyc), .lk_en_o(lk_en),
    .lk_k_o(lk_k), .pop_load_o(pop_load), .bias_load_o(bias_load), .out_load_o(out_load),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .stall_o(stall));
  always #5 clk = !clk;

  task automatic chk(logic cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 8) $display("cycle %0d: %s", cyc, msg);
    end
  endtask

  // Bookkeeping at every clock edge.
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (stall) stalls++;
    if (sample_release) begin
      released++;
      rel_times.push_back(cyc);
    end
    if (out_valid && out_ready) delivered++;
    if (out_valid && first_out < 0) first_out = cyc;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    sample_valid = 1;
    // Phase 1: full-rate operation, exact sequence.
    for (int s = 0; s < 4; s++) begin
      for (int c = 0; c < HC; c++) begin
        @(negedge clk);
        chk(issue && issue_cyc == 2'(c) && !lk_en, "issue sequence");
        chk(sample_release == (c == HC - 1), "release on last issue cycle");
      end
      @(negedge clk);
      chk(!issue && !lk_en, "drain cycle");
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        chk(lk_en && lk_k == 1'(k) && !issue, "lookup step");
      end
    end
    // Period and latency.
    chk(rel_times.size() == 4 && rel_times[1] - rel_times[0] == HC + 1 + K, "sample period");
    chk(delivered >= 2, "results delivered at full rate");
    chk(first_out - rel_times[0] == 7, $sformatf("latency release->out_valid %0d", first_out - rel_times[0]));
    // Phase 2: random output backpressure.
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      out_ready = (n % 100 < 50) ? 1'b0 : ($urandom % 2 == 0);
      sample_valid = ($urandom % 5 != 0);
    end
    @(negedge clk);
    sample_valid = 0;
    out_ready = 1;
    repeat (40) @(negedge clk);
    chk(delivered == released, "one result per sample");
    chk(stalls > 0, "backpressure stall happened");
    $display("released=%0d delivered=%0d stalls=%0d", released, delivered, stalls);
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
