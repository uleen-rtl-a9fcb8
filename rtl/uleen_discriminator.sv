// Discriminator: the N_F lookup units of one class within one submodel.
//
// All discriminators of a submodel receive the same hash results from the
// central hash block (partials_i[f][k]); in lookup step k (lk_k_i) every lookup
// unit f reads its table at partials_i[f][k]. After K steps resp_o[f] holds the
// response of filter f. The discriminator itself has no hashing and no
// popcount: counting is done in the shared adder trees. Structure as in the
// paper; the per-step address selection is this design's.
module uleen_discriminator
  import uleen_pkg::*;
#(
  parameter int unsigned SM_ID  = 0,
  parameter int unsigned CLS_ID = 0,
  parameter int unsigned N_F    = 458,
  parameter int unsigned E      = 64,
  parameter int unsigned K      = 2,
  localparam int unsigned HW    = $clog2(E),
  localparam int unsigned KW    = (K > 1) ? $clog2(K) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           cfg_we,
  input  cfg_addr_t                      cfg_addr,
  input  logic [CFG_DW-1:0]              cfg_wdata,
  input  logic [N_F-1:0][K-1:0][HW-1:0]  partials_i,
  input  logic                           lk_en_i,
  input  logic [KW-1:0]                  lk_k_i,
  output logic [N_F-1:0]                 resp_o
);
  for (genvar f = 0; f < N_F; f++) begin : g_lu
    logic [HW-1:0] addr;
    always_comb begin
      addr = partials_i[f][0];
      for (int k = 1; k < K; k++) if (lk_k_i == KW'(k)) addr = partials_i[f][k];
    end
    uleen_lookup #(.SM_ID(SM_ID), .CLS_ID(CLS_ID), .F_ID(f), .E(E)) u_lu (
      .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
      .lk_en_i, .lk_first_i(lk_k_i == '0), .addr_i(addr), .out_o(resp_o[f])
    );
  end
endmodule
