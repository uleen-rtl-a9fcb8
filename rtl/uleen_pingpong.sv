// Ping-pong input buffer: deserializes bus beats into whole samples.
//
// The accelerator's units work in lockstep on a complete sample, so a sample is
// first gathered beat by beat. Two sample halves alternate: one fills from the
// bus while the other is held for the hash blocks. Beat b of a sample carries
// values b*VPB .. b*VPB+VPB-1 (T thermometer bits each, already decompressed),
// and a sample takes BEATS = ceil(INPUTS/VPB) beats. Value v occupies bits
// [v*T +: T] of sample_o.
//
// Interface: beat_valid/beat_ready handshake on the input (ready is low while the
// half being filled is still full: an input stall); sample_valid means a full
// half is held; release (one cycle) frees it. Beat counting and the two-half
// scheme follow the paper's ping-pong buffer; the handshake is this design's.
module uleen_pingpong #(
  parameter int unsigned INPUTS = 784,
  parameter int unsigned T      = 7,
  parameter int unsigned VPB    = 64,
  localparam int unsigned BEATS = (INPUTS + VPB - 1) / VPB,
  localparam int unsigned TOT   = INPUTS * T,
  localparam int unsigned BW    = (BEATS > 1) ? $clog2(BEATS) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   beat_valid,
  output logic                   beat_ready,
  input  logic [VPB-1:0][T-1:0]  beat_i,
  output logic                   sample_valid,
  output logic [TOT-1:0]         sample_o,
  input  logic                   release_i
);
  logic [1:0][TOT-1:0] buf_q;
  logic [1:0]          full_q;
  logic                wp_q, rp_q;
  logic [BW-1:0]       cnt_q;
  logic                accept;

  assign beat_ready   = !full_q[wp_q];
  assign accept       = beat_valid && beat_ready;
  assign sample_valid = full_q[rp_q];
  assign sample_o     = buf_q[rp_q];

  // Data: value v is written by beat v/VPB.
  always_ff @(posedge clk) begin
    if (accept) begin
      for (int v = 0; v < INPUTS; v++) begin
        if (cnt_q == BW'(v / VPB)) buf_q[wp_q][v*T +: T] <= beat_i[v % VPB];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full_q <= '0;
      wp_q   <= 1'b0;
      rp_q   <= 1'b0;
      cnt_q  <= '0;
    end else begin
      if (accept) begin
        if (cnt_q == BW'(BEATS - 1)) begin
          cnt_q        <= '0;
          full_q[wp_q] <= 1'b1;
          wp_q         <= !wp_q;
        end else begin
          cnt_q <= cnt_q + 1'b1;
        end
      end
      if (release_i && full_q[rp_q]) begin
        full_q[rp_q] <= 1'b0;
        rp_q         <= !rp_q;
      end
    end
  end

  // A release only ever frees a held sample.
  assert property (@(posedge clk) disable iff (!rst_n) release_i |-> full_q[rp_q]);
endmodule
