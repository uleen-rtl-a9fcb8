// Decompression block: expands one bus beat of compressed inputs into unary
// thermometer codes.
//
// To save off-chip bandwidth each thermometer-encoded input may be sent as the
// binary count of its set bits (CW = clog2(T+1) bits). One decompression unit
// per value turns a count c into T bits with bits 0..c-1 set (bits are set from
// least to most significant, as in a thermometer). Counts above T saturate to
// all ones. Values are packed in the beat from bit 0 upward, VPB = BUS_W/CW of
// them, the remaining top bits unused.
//
// Purely combinational; the ping-pong buffer registers the result. The unit and
// its role follow the paper; the packing of values in a beat is this design's.
module uleen_decompress #(
  parameter int unsigned BUS_W = 192,
  parameter int unsigned T     = 7,
  localparam int unsigned CW   = $clog2(T + 1),
  localparam int unsigned VPB  = BUS_W / CW
) (
  input  logic [BUS_W-1:0]         beat_i,
  output logic [VPB-1:0][T-1:0]    therm_o
);
  always_comb begin
    for (int v = 0; v < VPB; v++) begin
      for (int b = 0; b < T; b++) begin
        therm_o[v][b] = (beat_i[v*CW +: CW] > CW'(b));
      end
    end
  end
endmodule
