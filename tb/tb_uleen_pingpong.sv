// Self-checking test of the ping-pong input buffer: samples of random values are
// streamed beat by beat, with random gaps and random hold times on the read
// side. Each held sample is compared with the values sent; the test also checks
// that the input stalls while both halves are full and that a sample needs
// exactly BEATS accepted beats.
module tb_uleen_pingpong;
  localparam int unsigned INPUTS = 20, T = 3, VPB = 6, BEATS = 4, TOT = INPUTS * T;
  logic clk = 0, rst_n = 0;
  logic beat_valid, beat_ready, sample_valid, release_i;
  logic [VPB-1:0][T-1:0] beat;
  logic [TOT-1:0] sample;
  int checks = 0, failures = 0, stalls = 0;
  logic [TOT-1:0] sent [$];
  logic [TOT-1:0] cur;
  int beat_no = 0, nsent = 0, nrecv = 0;

  uleen_pingpong #(.INPUTS(INPUTS), .T(T), .VPB(VPB)) dut (.*, .beat_i(beat), .sample_o(sample));

  always #5 clk = !clk;

  function automatic logic [TOT-1:0] rnd();
    logic [TOT-1:0] r;
    for (int w = 0; w < TOT; w++) r[w] = 1'($urandom);
    return r;
  endfunction

  // Producer.
  always @(posedge clk) begin
    if (rst_n) begin
      if (beat_valid && beat_ready) begin
        if (beat_no == BEATS - 1) begin
          sent.push_back(cur);
          cur <= rnd();
          nsent++;
          beat_no <= 0;
        end else beat_no <= beat_no + 1;
      end
      if (beat_valid && !beat_ready) stalls++;
    end
  end

  always_comb begin
    for (int i = 0; i < VPB; i++) begin
      automatic int v = beat_no * VPB + i;
      beat[i] = (v < INPUTS) ? cur[v*T +: T] : T'($urandom);
    end
  end

  initial begin
    beat_valid = 0;
    release_i = 0;
    cur = rnd();
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      begin
        while (nsent < 30) begin
          @(negedge clk);
          beat_valid = (nsent < 12) ? 1'b1 : ($urandom % 3 != 0);
        end
        @(negedge clk) beat_valid = 0;
      end
      begin
        while (nrecv < 30) begin
          @(negedge clk);
          release_i = 0;
          if (sample_valid && ($urandom % 4 == 0 || nrecv >= 12)) begin
            checks++;
            if (sent.size() == 0 || sample !== sent[0]) begin
              failures++;
              $display("sample %0d mismatch", nrecv);
            end
            if (sent.size() > 0) void'(sent.pop_front());
            release_i = 1;
            nrecv++;
          end
        end
        @(negedge clk) release_i = 0;
      end
    join
    checks++;
    if (stalls == 0) begin failures++; $display("input never stalled"); end
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
