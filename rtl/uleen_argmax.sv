// Argmax: index of the strongest class response.
//
// Compares the M signed responses and registers the index of the largest one
// when load_i is high. On a tie the lower class index wins (a
// choice of this design). One pipeline stage.
module uleen_argmax
  import uleen_pkg::*;
#(
  parameter int unsigned M  = 10,
  localparam int unsigned CW = (M > 1) ? $clog2(M) : 1
) (
  input  logic              clk,
  input  logic              load_i,
  input  resp_t [M-1:0]     resp_i,
  output logic [CW-1:0]     class_o
);
  logic [CW-1:0] idx;
  resp_t         best;

  always_comb begin
    idx  = '0;
    best = resp_i[0];
    for (int c = 1; c < M; c++) begin
      if (resp_i[c] > best) begin
        best = resp_i[c];
        idx  = CW'(c);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (load_i) class_o <= idx;
  end
endmodule
