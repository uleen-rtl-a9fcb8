// Central lockstep controller of the accelerator.
//
// All submodels work on the same sample at the same time, so one controller
// sequences them. For each sample held in the ping-pong buffer:
//   HASH   HC cycles: issue hash jobs (issue_cyc_o = 0..HC-1); on the last one
//          the sample is released back to the ping-pong buffer.
//   DRAIN  1 cycle: the hash units' last results enter the partials buffers.
//          Waits here while the lookup accumulators still hold an earlier
//          result that the next stage has not taken (a pipeline stall).
//   LOOKUP K cycles: lookup step lk_k_o = 0..K-1 in every lookup unit.
// Then the next sample may start hashing at once, giving a period of HC+1+K
// cycles per sample. Behind the lookups an elastic pipeline of three registers
// follows (popcount, bias, argmax), each loaded when it is empty or its
// content moves on; out_valid_o/out_ready_i hand the result out.
//
// The lockstep operation and the order hash -> lookup -> popcount -> bias ->
// argmax follow the paper; the state machine, the stall rule and the output
// handshake are this design's.
module uleen_ctrl #(
  parameter int unsigned HC = 10,
  parameter int unsigned K  = 2,
  localparam int unsigned CCW = (HC > 1) ? $clog2(HC) : 1,
  localparam int unsigned KW  = (K > 1) ? $clog2(K) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            sample_valid_i,
  output logic            sample_release_o,
  output logic            issue_o,
  output logic [CCW-1:0]  issue_cyc_o,
  output logic            lk_en_o,
  output logic [KW-1:0]   lk_k_o,
  output logic            pop_load_o,
  output logic            bias_load_o,
  output logic            out_load_o,
  output logic            out_valid_o,
  input  logic            out_ready_i,
  output logic            stall_o
);
  typedef enum logic [1:0] {S_IDLE, S_HASH, S_DRAIN, S_LOOKUP} state_e;

  state_e         state_q;
  logic [CCW-1:0] hc_q;
  logic [KW-1:0]  k_q;
  logic           acc_valid_q, pop_valid_q, bias_valid_q;

  assign issue_o          = (state_q == S_HASH);
  assign issue_cyc_o      = hc_q;
  assign sample_release_o = (state_q == S_HASH) && (hc_q == CCW'(HC - 1));
  assign lk_en_o          = (state_q == S_LOOKUP);
  assign lk_k_o           = k_q;

  assign out_load_o  = bias_valid_q && (!out_valid_o || out_ready_i);
  assign bias_load_o = pop_valid_q && (!bias_valid_q || out_load_o);
  assign pop_load_o  = acc_valid_q && (!pop_valid_q || bias_load_o);
  assign stall_o     = (state_q == S_DRAIN) && acc_valid_q && !pop_load_o;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= S_IDLE;
      hc_q         <= '0;
      k_q          <= '0;
      acc_valid_q  <= 1'b0;
      pop_valid_q  <= 1'b0;
      bias_valid_q <= 1'b0;
      out_valid_o  <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE: if (sample_valid_i) begin
          state_q <= S_HASH;
          hc_q    <= '0;
        end
        S_HASH: begin
          if (hc_q == CCW'(HC - 1)) begin
            state_q <= S_DRAIN;
            hc_q    <= '0;
          end else begin
            hc_q <= hc_q + 1'b1;
          end
        end
        S_DRAIN: if (!stall_o) begin
          state_q <= S_LOOKUP;
          k_q     <= '0;
        end
        S_LOOKUP: begin
          if (k_q == KW'(K - 1)) begin
            k_q     <= '0;
            state_q <= sample_valid_i ? S_HASH : S_IDLE;
          end else begin
            k_q <= k_q + 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase

      // Lookup accumulators: valid after the last lookup step, until taken.
      if (state_q == S_LOOKUP && k_q == KW'(K - 1)) acc_valid_q <= 1'b1;
      else if (pop_load_o)                          acc_valid_q <= 1'b0;

      if (pop_load_o)       pop_valid_q <= 1'b1;
      else if (bias_load_o) pop_valid_q <= 1'b0;

      if (bias_load_o)     bias_valid_q <= 1'b1;
      else if (out_load_o) bias_valid_q <= 1'b0;

      if (out_load_o)       out_valid_o <= 1'b1;
      else if (out_ready_i) out_valid_o <= 1'b0;
    end
  end

  // Lookups never overwrite a result that has not been taken.
  assert property (@(posedge clk) disable iff (!rst_n)
    (lk_en_o && lk_k_o == '0) |-> (!acc_valid_q || pop_load_o));
endmodule
