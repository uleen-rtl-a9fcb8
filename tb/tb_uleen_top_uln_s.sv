// End-to-end test of the accelerator built for the ULN-S model shape on the
// 192-bit bus: 784 inputs of 2 thermometer bits sent as 2-bit counts (96 per
// beat, 9 beats per sample), 10 classes, three submodels with 12/16/20-input
// filters of 64 entries. This is the smallest published MNIST model, and at
// 9 cycles per sample its throughput is the published one for it
// (500 MHz / 9 = 55.6 M inferences/s).
//
// Procedure: a random model (tables, about 30% of filters pruned, H3
// parameters, biases) is written, random samples are streamed in and each
// result is compared with a reference computed here from the same model (own
// H3 hash, Bloom lookup, pruning, bias and argmax); the result interval at full
// rate (one sample per 9 cycles), the isolated-sample latency (HC+8 cycles
// from the last beat) and the exercise of every mechanism (input stall, output
// backpressure stall, hashing overlapped with input, pruned filter that fired,
// decision changed by bias) are checked.
module tb_uleen_top_uln_s;
  import uleen_pkg::*;
  localparam int unsigned INPUTS = 784, T = 2, M = 10, K = 2, BUS_W = 192, NUM_SM = 3;
  localparam int unsigned SM_INPUTS [NUM_SM] = '{12, 16, 20};
  localparam int unsigned SM_ENTRIES [NUM_SM] = '{64, 64, 64};
  localparam int unsigned NSAMP = 40;
  localparam int unsigned WATCHDOG = 2000000;
  localparam int unsigned VW    = $clog2(T + 1);
  localparam int unsigned VPB   = BUS_W / VW;
  localparam int unsigned BEATS = (INPUTS + VPB - 1) / VPB;
  localparam int unsigned HC    = (BEATS > K + 1) ? BEATS - K - 1 : 1;
  localparam int unsigned TOT   = INPUTS * T;
  localparam int unsigned CLS_W = (M > 1) ? $clog2(M) : 1;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, cfg_we = 0, out_valid, out_ready = 1, stall;
  logic [BUS_W-1:0] in_data = '0;
  cfg_addr_t cfg_addr = '0;
  logic [CFG_DW-1:0] cfg_wdata = '0;
  logic [CLS_W-1:0] out_class;
  logic [M-1:0][RESP_W-1:0] out_resp;

  uleen_top #(.INPUTS(INPUTS), .T(T), .M(M), .K(K), .BUS_W(BUS_W), .NUM_SM(NUM_SM),
              .SM_INPUTS(SM_INPUTS), .SM_ENTRIES(SM_ENTRIES)) dut (.*);
  always #5 clk = !clk;

  function automatic int unsigned max_nf();
    int unsigned m = 0;
    for (int s = 0; s < NUM_SM; s++) if ((TOT + SM_INPUTS[s] - 1) / SM_INPUTS[s] > m) m = (TOT + SM_INPUTS[s] - 1) / SM_INPUTS[s];
    return m;
  endfunction
  localparam int unsigned MAXF = max_nf();

  // Model.
  logic [511:0] tbl  [NUM_SM][M][MAXF];
  bit           keep [NUM_SM][M][MAXF];
  logic [15:0]  prm  [NUM_SM][K][64];
  int           bias [M];
  int unsigned  amul [NUM_SM];

  // Expected results, in order.
  int exp_cls [$];
  int exp_resp [$];

  int checks = 0, failures = 0;
  int n_in_stall = 0, n_bp_stall = 0, n_overlap = 0, n_prune_hit = 0, n_bias_flip = 0;
  int cyc = 0, n_out = 0, pcyc = 0, nbeats = 0, t_lastbeat = 0, t_outrise = -1;
  logic out_valid_d = 0;
  int out_times [$];
  int phase = 0;

  function automatic int unsigned nf(int s);
    return (TOT + SM_INPUTS[s] - 1) / SM_INPUTS[s];
  endfunction

  function automatic int unsigned find_mult(int unsigned total, int unsigned s);
    int unsigned a = total / 3 + 97 * s + 1, x, y, t;
    forever begin
      x = a % total; y = total;
      while (y != 0) begin t = x % y; x = y; y = t; end
      if (x == 1) return a % total;
      a++;
    end
  endfunction

  task automatic cfg(cfg_target_e t, int s, int c, int idx, int sub, logic [CFG_DW-1:0] d);
    @(negedge clk);
    cfg_we = 1;
    cfg_addr = '{target: t, sm: CFG_SM_W'(s), cls: CFG_CLS_W'(c), idx: CFG_IDX_W'(idx), sub: CFG_SUB_W'(sub)};
    cfg_wdata = d;
  endtask

  task automatic load_model();
    int tot_f = 0;
    for (int s = 0; s < NUM_SM; s++) tot_f += nf(s);
    for (int s = 0; s < NUM_SM; s++) begin
      amul[s] = find_mult(TOT, s);
      for (int k = 0; k < K; k++)
        for (int i = 0; i < SM_INPUTS[s]; i++) begin
          prm[s][k][i] = 16'($urandom) & 16'((1 << $clog2(SM_ENTRIES[s])) - 1);
          cfg(CFG_HASH, s, 0, i, k, CFG_DW'(prm[s][k][i]));
        end
      for (int c = 0; c < M; c++)
        for (int f = 0; f < nf(s); f++) begin
          for (int w = 0; w < 8; w++) tbl[s][c][f][w*64 +: 64] = {$urandom, $urandom};
          for (int w = 0; w < (SM_ENTRIES[s] + 63) / 64; w++)
            cfg(CFG_LUT, s, c, f, w, tbl[s][c][f][w*64 +: 64]);
          keep[s][c][f] = ($urandom % 10) >= 3;
          if (!keep[s][c][f]) cfg(CFG_KEEP, s, c, f, 0, 64'd0);
        end
    end
    for (int c = 0; c < M; c++) begin
      bias[c] = int'($urandom % (tot_f / 8 + 1)) - int'(tot_f / 16);
      cfg(CFG_BIAS, 0, c, 0, 0, CFG_DW'(bias[c]));
    end
    @(negedge clk) cfg_we = 0;
  endtask

  // Reference inference of one sample given as per-input counts.
  task automatic reference(input int cnt [INPUTS]);
    logic [TOT-1:0] sb;
    int resp [M], raw [M];
    int bi, best, rbi, rbest;
    for (int v = 0; v < INPUTS; v++)
      for (int t = 0; t < T; t++) sb[v*T + t] = (cnt[v] > t);
    for (int c = 0; c < M; c++) raw[c] = 0;
    for (int s = 0; s < NUM_SM; s++)
      for (int f = 0; f < nf(s); f++) begin
        int unsigned h [K];
        for (int k = 0; k < K; k++) begin
          h[k] = 0;
          for (int b = 0; b < SM_INPUTS[s]; b++) begin
            longint unsigned pos = f * SM_INPUTS[s] + b;
            if (pos < TOT && sb[int'((longint'(amul[s]) * pos + 11 * s + 5) % TOT)])
              h[k] ^= prm[s][k][b];
          end
        end
        for (int c = 0; c < M; c++) begin
          bit fire = 1;
          for (int k = 0; k < K; k++) fire &= tbl[s][c][f][h[k]];
          if (fire && keep[s][c][f]) raw[c]++;
          if (fire && !keep[s][c][f]) n_prune_hit++;
        end
      end
    best = -1000000; bi = 0; rbest = -1000000; rbi = 0;
    for (int c = 0; c < M; c++) begin
      resp[c] = raw[c] + bias[c];
      if (resp[c] > best) begin best = resp[c]; bi = c; end
      if (raw[c] > rbest) begin rbest = raw[c]; rbi = c; end
      exp_resp.push_back(resp[c]);
    end
    if (bi != rbi) n_bias_flip++;
    exp_cls.push_back(bi);
  endtask

  task automatic send_sample(bit gaps);
    int cnt [INPUTS];
    for (int v = 0; v < INPUTS; v++) cnt[v] = $urandom % (T + 1);
    reference(cnt);
    for (int b = 0; b < BEATS; b++) begin
      logic [BUS_W-1:0] d;
      for (int w = 0; w < BUS_W; w++) d[w] = 1'($urandom);
      for (int i = 0; i < VPB; i++)
        if (b * VPB + i < INPUTS) d[i*VW +: VW] = VW'(cnt[b * VPB + i]);
      @(negedge clk);
      while (gaps && ($urandom % 3 == 0)) begin
        in_valid = 0;
        @(negedge clk);
      end
      in_valid = 1;
      in_data = d;
      while (!in_ready) @(negedge clk);
    end
  endtask

  task automatic idle_input();
    @(negedge clk) in_valid = 0;
  endtask

  // Output side and event counters, evaluated mid-cycle.
  always @(negedge clk) if (rst_n) begin
    cyc++;
    if (phase == 2) out_ready = ($urandom % 8 < 3) ? 1'b0 : ((cyc / 150) % 2 == 0);
    else if (phase != 0) out_ready = 1;
    if (in_valid && !in_ready) n_in_stall++;
    if (stall) n_bp_stall++;
    if (dut.issue && in_valid && in_ready) n_overlap++;
  end

  // Edge times of accepted last beats and rising out_valid, at clock edges.
  always @(posedge clk) if (rst_n) begin
    pcyc++;
    if (in_valid && in_ready) begin
      nbeats++;
      if (nbeats % BEATS == 0) t_lastbeat = pcyc;
    end
    if (out_valid && !out_valid_d && t_outrise < 0) t_outrise = pcyc;
    out_valid_d <= out_valid;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int ec;
    n_out++;
    out_times.push_back(cyc);
    checks++;
    if (exp_cls.size() == 0) begin
      failures++;
      $display("unexpected output");
    end else begin
      ec = exp_cls.pop_front();
      if (int'(out_class) != ec) begin
        failures++;
        if (failures < 6) $display("sample %0d: class %0d expected %0d", n_out - 1, out_class, ec);
      end
      for (int c = 0; c < M; c++) begin
        automatic int er = exp_resp.pop_front();
        checks++;
        if (int'($signed(out_resp[c])) != er) begin
          failures++;
          if (failures < 6) $display("sample %0d class %0d: response %0d expected %0d", n_out - 1, c, $signed(out_resp[c]), er);
        end
      end
    end
  end

  task automatic expect_ev(int n, string what);
    checks++;
    $display("%s: %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    int lat;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_model();
    phase = 1;
    // Latency of an isolated sample: cycle of the last beat to out_valid.
    send_sample(0);
    idle_input();
    while (t_outrise < 0) @(negedge clk);
    lat = t_outrise - t_lastbeat;
    checks++;
    $display("latency last beat -> out_valid: %0d cycles", lat);
    if (lat != int'(HC) + 8) begin failures++; $display("latency expected %0d", HC + 8); end
    repeat (5) @(negedge clk);
    // Full rate: one result every BEATS cycles.
    begin
      automatic int base = out_times.size();
      for (int n = 0; n < 8; n++) send_sample(0);
      idle_input();
      repeat (4 * BEATS + 30) @(negedge clk);
      for (int n = base + 2; n < base + 8; n++) begin
        checks++;
        if (out_times[n] - out_times[n - 1] != int'(BEATS)) begin
          failures++;
          $display("result interval %0d expected %0d", out_times[n] - out_times[n - 1], BEATS);
        end
      end
    end
    // Random gaps and output backpressure.
    phase = 2;
    for (int n = 9; n < NSAMP; n++) send_sample(1'(n % 2));
    idle_input();
    phase = 3;
    repeat (8 * BEATS + 60) @(negedge clk);
    checks++;
    if (exp_cls.size() != 0 || n_out != NSAMP) begin
      failures++;
      $display("results: %0d of %0d", n_out, NSAMP);
    end
    expect_ev(n_in_stall, "input stalls");
    expect_ev(n_bp_stall, "backpressure stalls");
    expect_ev(n_overlap, "hashing overlapped with input");
    expect_ev(n_prune_hit, "pruned filters that fired");
    expect_ev(n_bias_flip, "decisions changed by bias");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
