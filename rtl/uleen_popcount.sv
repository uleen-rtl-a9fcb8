// Popcount adder trees: one per class, counting the set filter responses of
// that class over all submodels of the ensemble.
//
// bits_i[c] is the concatenation of every filter response of class c (WIDTH
// bits: all submodels side by side). Summing the per-submodel popcounts and
// popcounting the concatenation are the same thing, so the ensemble's
// aggregation is folded into one count per class. The counts are registered when
// load_i is high (one pipeline stage). Each tree has two levels: the bits are
// counted in groups of 64, then the group counts are added. Function as in the
// paper; the grouping is this design's.
module uleen_popcount #(
  parameter int unsigned M     = 10,
  parameter int unsigned WIDTH = 16730,
  localparam int unsigned CNT_W = $clog2(WIDTH + 1),
  localparam int unsigned GRP   = 64,
  localparam int unsigned NG    = (WIDTH + GRP - 1) / GRP,
  localparam int unsigned GW    = $clog2(GRP + 1)
) (
  input  logic                        clk,
  input  logic                        load_i,
  input  logic [M-1:0][WIDTH-1:0]     bits_i,
  output logic [M-1:0][CNT_W-1:0]     cnt_o
);
  logic [M-1:0][NG*GRP-1:0]  padded;
  logic [M-1:0][NG-1:0][GW-1:0] gcnt;
  logic [M-1:0][CNT_W-1:0]   cnt;

  for (genvar c = 0; c < M; c++) begin : g_cls
    always_comb begin
      padded[c] = '0;
      padded[c][WIDTH-1:0] = bits_i[c];
    end
    for (genvar g = 0; g < NG; g++) begin : g_grp
      always_comb begin
        gcnt[c][g] = '0;
        for (int i = 0; i < GRP; i++) gcnt[c][g] += GW'(padded[c][g*GRP + i]);
      end
    end
    always_comb begin
      cnt[c] = '0;
      for (int g = 0; g < NG; g++) cnt[c] += CNT_W'(gcnt[c][g]);
    end
  end

  always_ff @(posedge clk) if (load_i) cnt_o <= cnt;
endmodule
