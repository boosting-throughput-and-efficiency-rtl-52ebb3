// tc_pkg: types and constants shared by the time-compressed SNN accelerator.
//
// A compressed spike is a small unsigned weight: the number of raw binary
// spikes that were merged into one compressed time step (0 means no spike).
// With compression ratios from 1:1 up to MAX_RATIO:1 a weight needs
// WSPK_W = 5 bits. Output spikes of the input-output-weighted neurons use the
// same encoding, so every layer speaks the same spike format.
//
// Synaptic weights are restricted to signed powers of two, +/-2^k, so that a
// weight times a spike weight is a left shift. syn_w_t encodes one synapse:
// en (connection present), neg (inhibitory) and the shift k.
//
// The reservoir's fixed random connectivity is derived from a small integer
// hash (syn_hash) evaluated at elaboration time, so no table is stored.
package tc_pkg;

  localparam int unsigned MAX_RATIO = 16;            // largest compression ratio
  localparam int unsigned RATIO_W   = 5;             // holds 1..16
  localparam int unsigned WSPK_W    = 5;             // spike weight 0..16
  localparam int unsigned SHIFT_W   = 4;             // decay shift amount 0..15
  localparam int unsigned SYN_K_W   = 3;             // synaptic weight exponent 0..7

  typedef logic [WSPK_W-1:0]  wspike_t;
  typedef logic [RATIO_W-1:0] ratio_t;
  typedef logic [SHIFT_W-1:0] shift_t;

  typedef struct packed {
    logic               en;   // synapse present
    logic               neg;  // inhibitory (weight is -2^k)
    logic [SYN_K_W-1:0] k;    // |weight| = 2^k
  } syn_w_t;

  localparam syn_w_t SYN_NONE = '0;

  // 32-bit integer mixing function (xorshift-multiply), constant-evaluable.
  function automatic logic [31:0] mix32(input logic [31:0] x);
    logic [31:0] h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h7feb352d;
    h = h ^ (h >> 15);
    h = h * 32'h846ca68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Fixed random synapse from presynaptic i to postsynaptic j.
  // prob_256: connection probability in 1/256 units; inh_256: share of
  // inhibitory presynaptic neurons; k_max: largest weight exponent.
  function automatic syn_w_t syn_hash(input int unsigned seed, input int unsigned i,
                                      input int unsigned j, input int unsigned prob_256,
                                      input int unsigned inh_256, input int unsigned k_max);
    logic [31:0] h, hi;
    syn_w_t s;
    h  = mix32(seed ^ (i * 32'h9e3779b1) ^ (j * 32'h85ebca77));
    hi = mix32(seed ^ 32'h5bd1e995 ^ (i * 32'hc2b2ae3d));
    s.en  = ({1'b0, h[7:0]} < prob_256[8:0]);
    s.neg = ({1'b0, hi[7:0]} < inh_256[8:0]);
    s.k   = SYN_K_W'(h[15:8] % (k_max + 1));
    if (!s.en) s = SYN_NONE;
    return s;
  endfunction

endpackage
