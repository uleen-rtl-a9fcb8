// Parameter register file of one submodel's hash block.
//
// Holds the H3 parameters of the K hash functions: K x N_IN entries of HW bits.
// The same parameters are shared by every Bloom filter of the submodel, so one
// small register file serves all hash units. Written through the configuration
// port (target CFG_HASH, idx = input bit, sub = hash function, data[HW-1:0]);
// a write takes effect on the next cycle. Cleared to zero on reset.
//
// Sharing the parameters follows the paper; the write port is this design's.
module uleen_param_rf
  import uleen_pkg::*;
#(
  parameter int unsigned SM_ID = 0,
  parameter int unsigned N_IN  = 12,
  parameter int unsigned HW    = 6,
  parameter int unsigned K     = 2
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              cfg_we,
  input  cfg_addr_t                         cfg_addr,
  input  logic [CFG_DW-1:0]                 cfg_wdata,
  output logic [K-1:0][N_IN-1:0][HW-1:0]    param_o
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      param_o <= '0;
    end else if (cfg_we && cfg_addr.target == CFG_HASH && cfg_addr.sm == CFG_SM_W'(SM_ID)) begin
      for (int k = 0; k < K; k++)
        for (int i = 0; i < N_IN; i++)
          if (cfg_addr.sub == CFG_SUB_W'(k) && cfg_addr.idx == CFG_IDX_W'(i))
            param_o[k][i] <= cfg_wdata[HW-1:0];
    end
  end
endmodule
