// ULEEN inference accelerator: an ensemble of weightless (RAM-node) submodels
// built from binary Bloom filters, evaluated in a fixed number of cycles per
// sample.
//
// Data path: bus beats -> decompression (binary count -> thermometer code) ->
// ping-pong buffer (one whole sample) -> NUM_SM submodels, each with a central
// H3 hash block and M discriminators of lookup units -> popcount adder trees per
// class over all submodels -> per-class bias -> argmax -> predicted class.
//
// Defaults are the ULN-L model on MNIST with a 192-bit bus: 784 inputs of 7
// thermometer bits sent as 3-bit counts (64 per beat, 13 beats per sample),
// 10 classes, 2 hash functions per filter, six submodels. The hash jobs of a
// sample are spread over HC = BEATS-K-1 cycles so that hashing (HC), draining
// (1) and the K lookups take exactly one sample period of BEATS cycles: at full
// input rate one inference finishes every 13 cycles. The latency from the last
// beat of a sample to out_valid is HC+8 cycles (18 at the defaults) when the
// design is idle; the stated throughput (13 cycles) equals the paper's ULN-L
// ASIC figure, the latency is this design's own (the paper quotes 28 cycles).
// Taken from the paper: the block order, lockstep operation, the ULN-L sizes,
// the bus width and the optional input compression. This design's own: the
// handshakes, the run-time configuration port and the input reordering formula.
//
// Interfaces: in_valid/in_ready beats (in_ready low = input stall);
// cfg_we/cfg_addr/cfg_wdata writes the model (see uleen_pkg); out_valid/out_ready
// with out_class and the biased responses out_resp. The model must be written
// before samples are sent; writes during inference take effect immediately.
module uleen_top
  import uleen_pkg::*;
#(
  parameter int unsigned INPUTS     = 784,
  parameter int unsigned T          = 7,
  parameter int unsigned M          = 10,
  parameter int unsigned K          = 2,
  parameter int unsigned BUS_W      = 192,
  parameter bit          COMPRESSED = 1'b1,
  parameter int unsigned NUM_SM     = ULN_L_NUM_SM,
  parameter int unsigned SM_INPUTS  [NUM_SM] = ULN_L_INPUTS,
  parameter int unsigned SM_ENTRIES [NUM_SM] = ULN_L_ENTRIES,
  localparam int unsigned VW    = COMPRESSED ? $clog2(T + 1) : T,
  localparam int unsigned VPB   = BUS_W / VW,
  localparam int unsigned BEATS = (INPUTS + VPB - 1) / VPB,
  parameter int unsigned HC     = (BEATS > K + 1) ? BEATS - K - 1 : 1,
  localparam int unsigned TOT   = INPUTS * T,
  localparam int unsigned CLS_W = (M > 1) ? $clog2(M) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [BUS_W-1:0]   in_data,
  input  logic               cfg_we,
  input  cfg_addr_t          cfg_addr,
  input  logic [CFG_DW-1:0]  cfg_wdata,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [CLS_W-1:0]   out_class,
  output resp_t [M-1:0]      out_resp,
  output logic               stall
);
  // Filter counts and their offsets in the concatenated response vector.
  function automatic int unsigned n_f(int unsigned s);
    return (TOT + SM_INPUTS[s] - 1) / SM_INPUTS[s];
  endfunction
  function automatic int unsigned f_off(int unsigned s);
    int unsigned o = 0;
    for (int unsigned i = 0; i < s; i++) o += n_f(i);
    return o;
  endfunction
  localparam int unsigned TOT_F = f_off(NUM_SM);
  localparam int unsigned CNT_W = $clog2(TOT_F + 1);
  localparam int unsigned CCW   = (HC > 1) ? $clog2(HC) : 1;
  localparam int unsigned KW    = (K > 1) ? $clog2(K) : 1;

  logic [VPB-1:0][T-1:0]    beat;
  logic                     sample_valid, sample_release;
  logic [TOT-1:0]           sample;
  logic                     issue, lk_en, pop_load, bias_load, out_load;
  logic [CCW-1:0]           issue_cyc;
  logic [KW-1:0]            lk_k;
  logic [M-1:0][TOT_F-1:0]  all_resp;
  logic [M-1:0][CNT_W-1:0]  cnt;
  resp_t [M-1:0]            biased;

  if (COMPRESSED) begin : g_decomp
    uleen_decompress #(.BUS_W(BUS_W), .T(T)) u_decomp (.beat_i(in_data), .therm_o(beat));
  end else begin : g_raw
    assign beat = in_data[VPB*T-1:0];
  end

  uleen_pingpong #(.INPUTS(INPUTS), .T(T), .VPB(VPB)) u_pp (
    .clk, .rst_n, .beat_valid(in_valid), .beat_ready(in_ready), .beat_i(beat),
    .sample_valid, .sample_o(sample), .release_i(sample_release)
  );

  uleen_ctrl #(.HC(HC), .K(K)) u_ctrl (
    .clk, .rst_n, .sample_valid_i(sample_valid), .sample_release_o(sample_release),
    .issue_o(issue), .issue_cyc_o(issue_cyc), .lk_en_o(lk_en), .lk_k_o(lk_k),
    .pop_load_o(pop_load), .bias_load_o(bias_load), .out_load_o(out_load),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .stall_o(stall)
  );

  for (genvar s = 0; s < NUM_SM; s++) begin : g_sm
    localparam int unsigned NF = n_f(s);
    localparam int unsigned OFF = f_off(s);
    logic [M-1:0][NF-1:0] resp;
    uleen_submodel #(.SM_ID(s), .TOT(TOT), .N_IN(SM_INPUTS[s]), .E(SM_ENTRIES[s]), .K(K),
                     .HC(HC), .M(M)) u_sm (
      .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .sample_i(sample),
      .issue_i(issue), .issue_cyc_i(issue_cyc), .lk_en_i(lk_en), .lk_k_i(lk_k), .resp_o(resp)
    );
    for (genvar c = 0; c < M; c++) begin : g_cls
      assign all_resp[c][OFF +: NF] = resp[c];
    end
  end

  uleen_popcount #(.M(M), .WIDTH(TOT_F)) u_pop (.clk, .load_i(pop_load), .bits_i(all_resp), .cnt_o(cnt));

  uleen_bias #(.M(M), .CNT_W(CNT_W)) u_bias (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .load_i(bias_load), .cnt_i(cnt), .resp_o(biased)
  );

  uleen_argmax #(.M(M)) u_argmax (.clk, .load_i(out_load), .resp_i(biased), .class_o(out_class));

  // The responses travel with the class: captured with it.
  always_ff @(posedge clk) if (out_load) out_resp <= biased;

  // Configuration fields must fit the parameters.
  initial begin
    assert (NUM_SM <= (1 << CFG_SM_W) && M <= (1 << CFG_CLS_W));
    assert (HC + 1 + K <= BEATS || BEATS <= K + 1);
  end
endmodule
