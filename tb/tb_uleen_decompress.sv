// Self-checking test of the decompression block: random beats of 3-bit counts
// are expanded and compared with (2^count - 1), the thermometer code of each
// count (saturating at T bits).
module tb_uleen_decompress;
  localparam int unsigned BUS_W = 192, T = 7, CW = 3, VPB = 64;
  logic [BUS_W-1:0]      beat;
  logic [VPB-1:0][T-1:0] therm;
  int checks = 0, failures = 0;

  uleen_decompress #(.BUS_W(BUS_W), .T(T)) dut (.beat_i(beat), .therm_o(therm));

  initial begin
    for (int n = 0; n < 200; n++) begin
      for (int w = 0; w < BUS_W / 32; w++) beat[w*32 +: 32] = $urandom;
      #1;
      for (int v = 0; v < VPB; v++) begin
        automatic int unsigned c = beat[v*CW +: CW];
        automatic logic [T-1:0] exp_t = T'((1 << (c > T ? T : c)) - 1);
        checks++;
        if (therm[v] !== exp_t) begin
          failures++;
          if (failures < 5) $display("value %0d count %0d: got %b exp %b", v, c, therm[v], exp_t);
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
