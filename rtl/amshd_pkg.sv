// amshd_pkg -- shared types, default sizes and pattern functions of the
// AMS-HD binary hyperdimensional classifier.
//
// Default sizes follow the FPGA configuration of the design: D = 256 bits per
// hypervector, two classes (No AMS / AMS) and Sobol threshold th = 0.65 for the
// position-generator patterns. The number of features (4: SpO2, HR, event,
// time) and the 16-bit feature fraction width are this implementation's choice.
//
// The position HV generator needs a D-bit feedback mask and a D-bit initial
// seed "derived from Sobol sequences". They are computed here bit by bit:
//   mask[k] = ( s1(k+1) <  th )
//   seed[k] = ( s2(k)   >= 1 - th )
// where s1 is the first Sobol dimension (van der Corput, bit reversal of k) and
// s2 the second Sobol dimension (direction numbers of the polynomial x+1,
// v(j+1) = v(j) ^ (v(j) >> 1)). Both are 32-bit fractions. With th = 0.65
// these give mask = 110...1 and seed = 011...0 at D = 256, the prefixes and
// last bits that the design's drawing prints. The exact mapping from Sobol
// points to bits is this implementation's choice.
package amshd_pkg;

  localparam int unsigned D_DEFAULT           = 256;
  localparam int unsigned N_FEATURES_DEFAULT  = 4;
  localparam int unsigned FEAT_W_DEFAULT      = 16;
  localparam int unsigned NUM_CLASSES_DEFAULT = 2;
  localparam int unsigned TH_PERMILLE_DEFAULT = 650;
  localparam int unsigned SAMPLE_CNT_W_DEFAULT = 16;

  // Operation applied to a sample once its features have been encoded.
  typedef enum logic {
    MODE_INFER = 1'b0,
    MODE_TRAIN = 1'b1
  } mode_e;

  // First Sobol dimension: radical inverse of k in base 2, as a 32-bit fraction.
  function automatic logic [31:0] sobol_dim1(input int unsigned k);
    logic [31:0] x;
    for (int b = 0; b < 32; b++) x[31-b] = k[b];
    return x;
  endfunction

  // Second Sobol dimension, direct (non Gray-code) construction.
  function automatic logic [31:0] sobol_dim2(input int unsigned k);
    logic [31:0] x;
    logic [31:0] v;
    x = '0;
    v = 32'h8000_0000;
    for (int b = 0; b < 32; b++) begin
      if (k[b]) x = x ^ v;
      v = v ^ (v >> 1);
    end
    return x;
  endfunction

  // Compare a 32-bit fraction with a per-mille threshold: x < th.
  function automatic bit frac_lt_permille(input logic [31:0] x, input int unsigned th);
    longint unsigned lhs;
    longint unsigned rhs;
    lhs = longint'(x) * 64'd1000;
    rhs = longint'(th) << 32;
    return lhs < rhs;
  endfunction

  function automatic bit mask_bit(input int unsigned k, input int unsigned th);
    return frac_lt_permille(sobol_dim1(k + 1), th);
  endfunction

  function automatic bit seed_bit(input int unsigned k, input int unsigned th);
    return !frac_lt_permille(sobol_dim2(k), 1000 - th);
  endfunction

endpackage
