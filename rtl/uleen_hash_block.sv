// Hash block of one submodel: input reordering, time-shared H3 hash units and
// the partials buffer.
//
// Every filter of the submodel takes N_IN bits of the sample, picked by a fixed
// pseudo-random reordering (filter f, input b reads sample bit
// (A*(f*N_IN+b) + 11*SM_ID + 5) mod TOT, A = perm_mult(TOT, SM_ID) from
// uleen_pkg; positions past TOT read 0). Since all discriminators of a
// submodel share the reordering and the hash parameters, the K hashes of each
// filter input are computed once here for all classes.
//
// The N_F*K hash jobs (job j = filter j/K, hash function j%K) are spread over
// H = ceil(N_F*K/HC) hash units: in issue cycle c (0..HC-1) unit u computes job
// c*H+u. Each unit has one cycle of latency; its result is written into the
// partials buffer the next cycle. After the last write the buffer holds every
// hash of the sample and the lookups can start. The buffer is read as
// partials_o[f][k].
//
// Timing: issue_i is high for HC consecutive cycles with issue_cyc_i = 0..HC-1;
// the buffer is complete one cycle after the last issue. The sharing of hash
// parameters and hash results, the central hash block and the partials buffer
// follow the paper; the job schedule and the reordering formula are this
// design's (the paper takes the order from training).
module uleen_hash_block
  import uleen_pkg::*;
#(
  parameter int unsigned SM_ID = 0,
  parameter int unsigned TOT   = 5488,
  parameter int unsigned N_IN  = 12,
  parameter int unsigned HW    = 6,
  parameter int unsigned K     = 2,
  parameter int unsigned HC    = 10,
  localparam int unsigned N_F  = (TOT + N_IN - 1) / N_IN,
  localparam int unsigned NJ   = N_F * K,
  localparam int unsigned H    = (NJ + HC - 1) / HC,
  localparam int unsigned CCW  = (HC > 1) ? $clog2(HC) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              cfg_we,
  input  cfg_addr_t                         cfg_addr,
  input  logic [CFG_DW-1:0]                 cfg_wdata,
  input  logic [TOT-1:0]                    sample_i,
  input  logic                              issue_i,
  input  logic [CCW-1:0]                    issue_cyc_i,
  output logic [N_F-1:0][K-1:0][HW-1:0]     partials_o
);
  localparam longint unsigned A = longint'(perm_mult(TOT, SM_ID));

  logic [K-1:0][N_IN-1:0][HW-1:0] param;
  logic [N_F-1:0][N_IN-1:0]       fin;
  logic [H-1:0][HW-1:0]           hash;
  logic                           wr_q;
  logic [CCW-1:0]                 wr_cyc_q;

  uleen_param_rf #(.SM_ID(SM_ID), .N_IN(N_IN), .HW(HW), .K(K)) u_rf (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .param_o(param)
  );

  // Fixed input reordering (wiring only).
  for (genvar f = 0; f < N_F; f++) begin : g_fin
    for (genvar b = 0; b < N_IN; b++) begin : g_bit
      localparam int unsigned POS = f * N_IN + b;
      localparam int unsigned SRC = int'((A * longint'(POS) + longint'(11 * SM_ID + 5)) % longint'(TOT));
      if (POS < TOT) begin : g_src
        assign fin[f][b] = sample_i[SRC];
      end else begin : g_pad
        assign fin[f][b] = 1'b0;
      end
    end
  end

  // Hash units, each fed by a small multiplexer over its HC jobs.
  for (genvar u = 0; u < H; u++) begin : g_unit
    logic [N_IN-1:0]          x;
    logic [N_IN-1:0][HW-1:0]  p;
    always_comb begin
      x = '0;
      p = '0;
      for (int c = 0; c < HC; c++) begin
        if (issue_cyc_i == CCW'(c) && (c * H + u) < NJ) begin
          x = fin[(c * H + u) / K];
          p = param[(c * H + u) % K];
        end
      end
    end
    uleen_hash_unit #(.N_IN(N_IN), .HW(HW)) u_hash (.clk, .x_i(x), .param_i(p), .hash_o(hash[u]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_q     <= 1'b0;
      wr_cyc_q <= '0;
    end else begin
      wr_q     <= issue_i;
      wr_cyc_q <= issue_cyc_i;
    end
  end

  // Partials buffer: job j is written by unit j%H in write cycle j/H.
  always_ff @(posedge clk) begin
    if (wr_q) begin
      for (int j = 0; j < NJ; j++)
        if (wr_cyc_q == CCW'(j / H)) partials_o[j / K][j % K] <= hash[j % H];
    end
  end
endmodule
