// dr_pkg: types and arithmetic shared by the dimensionality-reduction datapath.
//
// All datapath words are signed two's-complement fixed point, DATA_W bits wide
// with FRAC_W fraction bits (Q15.16 by default). A product is formed at full
// double width, rounded to the nearest multiple of 2^-FRAC_W (ties upward) and
// wrapped back to DATA_W bits; additions wrap as well. Rounding rather than
// truncating matters: a truncated product is biased by half an LSB, and over
// thousands of updates of B that bias builds up. The published design
// uses 32-bit floating point throughout; fixed point is this implementation's
// choice, so results are bit-exact and reproducible by a simple reference model.
//
// The random-projection matrix R holds only -1, 0 and +1, coded in two bits.
// The operating mode is a small struct of independent enables. Together they
// select random projection alone, PCA whitening, ICA (EASI), or random projection
// followed by either of the latter two.
package dr_pkg;

  parameter int DATA_W = 32;
  parameter int FRAC_W = 16;

  typedef logic signed [DATA_W-1:0] fx_t;

  localparam fx_t FX_ONE = fx_t'(64'sd1 <<< FRAC_W);

  // Code of one element r_ij of the random-projection matrix.
  typedef enum logic [1:0] {
    R_ZERO = 2'b00,
    R_POS  = 2'b01,
    R_NEG  = 2'b11
  } rp_code_t;

  // Run-time configuration.
  typedef struct packed {
    logic rp_bypass;  // 1: feed x straight to EASI (random projection acts as identity)
    logic so_en;      // 1: include the second-order term  y y^T - I     (PCA whitening)
    logic hos_en;     // 1: include the higher-order term  g(y)y^T - y g(y)^T (rotation)
    logic train_en;   // 1: update the separation matrix B; 0: inference only
  } mode_t;

  // Fixed-point product: full-width multiply, round off FRAC_W fraction bits.
  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*DATA_W-1:0] p;
    p = a * b + (2*DATA_W)'(64'sd1 <<< (FRAC_W - 1));
    return fx_t'(p >>> FRAC_W);
  endfunction

endpackage
