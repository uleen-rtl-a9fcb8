// Shared types and constants of the ULEEN weightless-network inference accelerator.
//
// The accelerator classifies one input sample per fixed number of cycles using an
// ensemble of weightless submodels whose RAM nodes are binary Bloom filters. The
// trained model (filter tables, pruning, H3 hash parameters, class biases) is
// written through one configuration port whose address is the struct cfg_addr_t
// below. Loading the model at run time is a choice of this design; the reference
// flow hard-wires the trained tables into generated RTL.
//
// The default model sizes are those of the largest published model (ULN-L) on
// MNIST: 784 inputs, 7 thermometer bits per input, 10 classes, 2 hash functions
// per filter, six submodels with 12/16/20/24/28/32 inputs and 64/128/128/256/256/512
// entries per filter, on a 192-bit input bus.
package uleen_pkg;

  // Configuration targets.
  typedef enum logic [1:0] {
    CFG_LUT  = 2'd0,  // 64 table bits of one filter: sm, cls, idx = filter, sub = word
    CFG_KEEP = 2'd1,  // pruning flag of one filter: sm, cls, idx = filter, data[0] = keep
    CFG_HASH = 2'd2,  // one H3 parameter: sm, idx = filter input bit, sub = hash function
    CFG_BIAS = 2'd3   // class bias: cls, data[RESP_W-1:0]
  } cfg_target_e;

  localparam int unsigned CFG_SM_W   = 3;
  localparam int unsigned CFG_CLS_W  = 4;
  localparam int unsigned CFG_IDX_W  = 10;
  localparam int unsigned CFG_SUB_W  = 4;
  localparam int unsigned CFG_DW     = 64;   // table bits per configuration write

  typedef struct packed {
    cfg_target_e           target;
    logic [CFG_SM_W-1:0]   sm;
    logic [CFG_CLS_W-1:0]  cls;
    logic [CFG_IDX_W-1:0]  idx;
    logic [CFG_SUB_W-1:0]  sub;
  } cfg_addr_t;

  // Width of a class response after bias (signed, two's complement).
  localparam int unsigned RESP_W = 16;
  typedef logic signed [RESP_W-1:0] resp_t;

  // Default model: ULN-L.
  localparam int unsigned ULN_L_NUM_SM = 6;
  localparam int unsigned ULN_L_INPUTS  [ULN_L_NUM_SM] = '{12, 16, 20, 24, 28, 32};
  localparam int unsigned ULN_L_ENTRIES [ULN_L_NUM_SM] = '{64, 128, 128, 256, 256, 512};

  // Greatest common divisor, used to pick a permutation multiplier.
  function automatic int unsigned gcd(int unsigned a, int unsigned b);
    int unsigned x = a, y = b, t;
    while (y != 0) begin
      t = x % y;
      x = y;
      y = t;
    end
    return x;
  endfunction

  // Multiplier A of the input permutation of submodel `sm` over `total` bits:
  // the smallest value >= (total/3 + 97*sm + 1) that is coprime to total, taken
  // mod total. Filter-input position p then reads sample bit
  // (A*p + 11*sm + 5) mod total (see uleen_hash_block).
  function automatic int unsigned perm_mult(int unsigned total, int unsigned sm);
    int unsigned a = (total / 3) + 97 * sm + 1;
    while (gcd(a % total, total) != 1) a++;
    return a % total;
  endfunction

endpackage
