// Bias adders: add one learned integer bias to each class count.
//
// Pruning removes filters unevenly between classes, so the trained model adds a
// per-class integer bias to the response; with an ensemble the biases of all
// submodels are summed into this single value per class. resp_o[c] =
// cnt_i[c] + bias[c] as a signed RESP_W-bit number, registered when load_i is
// high. Biases are written with CFG_BIAS (cls, data[RESP_W-1:0]) and reset to 0.
// The M adders follow the paper; the bias width and write port are this design's.
module uleen_bias
  import uleen_pkg::*;
#(
  parameter int unsigned M     = 10,
  parameter int unsigned CNT_W = 15
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      cfg_we,
  input  cfg_addr_t                 cfg_addr,
  input  logic [CFG_DW-1:0]         cfg_wdata,
  input  logic                      load_i,
  input  logic [M-1:0][CNT_W-1:0]   cnt_i,
  output resp_t [M-1:0]             resp_o
);
  resp_t [M-1:0] bias_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bias_q <= '0;
    end else if (cfg_we && cfg_addr.target == CFG_BIAS) begin
      for (int c = 0; c < M; c++)
        if (cfg_addr.cls == CFG_CLS_W'(c)) bias_q[c] <= resp_t'(cfg_wdata[RESP_W-1:0]);
    end
  end

  always_ff @(posedge clk) begin
    if (load_i)
      for (int c = 0; c < M; c++) resp_o[c] <= resp_t'({1'b0, cnt_i[c]}) + bias_q[c];
  end
endmodule
