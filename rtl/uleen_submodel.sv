// One weightless submodel of the ensemble: a hash block and M discriminators.
//
// The submodel sees the whole thermometer-encoded sample (TOT bits). It has
// N_F = ceil(TOT/N_IN) Bloom filters per class, each with E entries and K hash
// functions. The hash block computes all N_F*K hashes once; the M
// discriminators then look them up in lockstep. resp_o[c][f] is the response of
// filter f of class c, valid after the K lookup steps. Control comes from the
// accelerator's central controller (see uleen_ctrl). Organisation as in the
// paper's submodel figure.
module uleen_submodel
  import uleen_pkg::*;
#(
  parameter int unsigned SM_ID = 0,
  parameter int unsigned TOT   = 5488,
  parameter int unsigned N_IN  = 12,
  parameter int unsigned E     = 64,
  parameter int unsigned K     = 2,
  parameter int unsigned HC    = 10,
  parameter int unsigned M     = 10,
  localparam int unsigned HW   = $clog2(E),
  localparam int unsigned N_F  = (TOT + N_IN - 1) / N_IN,
  localparam int unsigned CCW  = (HC > 1) ? $clog2(HC) : 1,
  localparam int unsigned KW   = (K > 1) ? $clog2(K) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      cfg_we,
  input  cfg_addr_t                 cfg_addr,
  input  logic [CFG_DW-1:0]         cfg_wdata,
  input  logic [TOT-1:0]            sample_i,
  input  logic                      issue_i,
  input  logic [CCW-1:0]            issue_cyc_i,
  input  logic                      lk_en_i,
  input  logic [KW-1:0]             lk_k_i,
  output logic [M-1:0][N_F-1:0]     resp_o
);
  logic [N_F-1:0][K-1:0][HW-1:0] partials;

  uleen_hash_block #(.SM_ID(SM_ID), .TOT(TOT), .N_IN(N_IN), .HW(HW), .K(K), .HC(HC)) u_hash (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .sample_i, .issue_i, .issue_cyc_i,
    .partials_o(partials)
  );

  for (genvar c = 0; c < M; c++) begin : g_disc
    uleen_discriminator #(.SM_ID(SM_ID), .CLS_ID(c), .N_F(N_F), .E(E), .K(K)) u_disc (
      .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .partials_i(partials),
      .lk_en_i, .lk_k_i, .resp_o(resp_o[c])
    );
  end
endmodule
