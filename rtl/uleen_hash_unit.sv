// H3 hash unit: computes one hash of an N_IN-bit filter input per cycle.
//
// An H3 hash function is defined by one random HW-bit parameter p[i] per input
// bit; the hash is the XOR of the parameters whose input bit is 1:
//   h(x) = XOR over i of (x[i] AND p[i]).
// There is no arithmetic: an AND row followed by an XOR reduction tree. The
// result is registered, so the unit is a one-stage pipeline with a throughput of
// one hash per cycle and a latency of one cycle.
//
// The paper's text says the units use only AND and OR operations; the H3 family
// it names is defined with XOR, which is what is built here.
module uleen_hash_unit #(
  parameter int unsigned N_IN = 12,
  parameter int unsigned HW   = 6
) (
  input  logic                     clk,
  input  logic [N_IN-1:0]          x_i,
  input  logic [N_IN-1:0][HW-1:0]  param_i,
  output logic [HW-1:0]            hash_o
);
  logic [HW-1:0] h;

  always_comb begin
    h = '0;
    for (int i = 0; i < N_IN; i++) h ^= param_i[i] & {HW{x_i[i]}};
  end

  always_ff @(posedge clk) hash_o <= h;
endmodule
