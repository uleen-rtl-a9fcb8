// Bloom filter lookup unit: the table of one binarized Bloom filter and its
// 1-bit AND accumulator.
//
// The table has E one-bit entries. The K hash results of the filter input are
// presented on addr_i in K consecutive cycles with lk_en_i high; lk_first_i marks
// the first. The accumulator loads the table bit on the first lookup and the AND
// of the table bit with its contents on the others, so after K lookups it holds
// the filter response: 1 only if all K addressed entries are 1. The result stays
// in the accumulator until the next first lookup. A pruned filter (keep = 0)
// always answers 0, removing it from the class response.
//
// Configuration: CFG_LUT writes 64 entries (word sub covers entries
// 64*sub .. 64*sub+63, bit i of the data is entry 64*sub+i); CFG_KEEP writes the
// keep flag from data[0]; keep resets to 1, the table is not reset. The lookup
// table, AND, select and 1-bit register follow the paper's lookup unit; the
// writable table and keep flag are this design's way of loading a trained and
// pruned model.
module uleen_lookup
  import uleen_pkg::*;
#(
  parameter int unsigned SM_ID  = 0,
  parameter int unsigned CLS_ID = 0,
  parameter int unsigned F_ID   = 0,
  parameter int unsigned E      = 64,
  localparam int unsigned HW    = $clog2(E),
  localparam int unsigned NW    = (E + CFG_DW - 1) / CFG_DW,
  localparam int unsigned WB    = (E < CFG_DW) ? E : CFG_DW
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_we,
  input  cfg_addr_t          cfg_addr,
  input  logic [CFG_DW-1:0]  cfg_wdata,
  input  logic               lk_en_i,
  input  logic               lk_first_i,
  input  logic [HW-1:0]      addr_i,
  output logic               out_o
);
  logic [E-1:0] lut_q;
  logic         keep_q;
  logic         acc_q;
  logic         sel;

  assign sel = cfg_we && cfg_addr.sm == CFG_SM_W'(SM_ID) && cfg_addr.cls == CFG_CLS_W'(CLS_ID)
            && cfg_addr.idx == CFG_IDX_W'(F_ID);

  always_ff @(posedge clk) begin
    if (sel && cfg_addr.target == CFG_LUT) begin
      for (int w = 0; w < NW; w++)
        if (cfg_addr.sub == CFG_SUB_W'(w)) lut_q[w*CFG_DW +: WB] <= cfg_wdata[WB-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      keep_q <= 1'b1;
      acc_q  <= 1'b0;
    end else begin
      if (sel && cfg_addr.target == CFG_KEEP) keep_q <= cfg_wdata[0];
      if (lk_en_i) acc_q <= lk_first_i ? lut_q[addr_i] : (acc_q & lut_q[addr_i]);
    end
  end

  assign out_o = acc_q & keep_q;
endmodule
