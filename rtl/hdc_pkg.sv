// hdc_pkg: types, constants and small arithmetic helpers shared by the
// streaming hyperdimensional (HD) encoder and logistic-regression learner.
//
// What it holds:
//   * combine_e      - how the numeric and categorical embeddings are merged
//                      (thresholded sum = OR, plain SUM, categorical only
//                      "No-Count", or concatenation into a 2D-long vector).
//   * Murmur3 x86_32 constants, used by murmur3_hash and by the testbenches'
//                      reference models.
//   * sigmoid_plan() - the logistic sigmoid approximated piecewise-linearly
//                      with shifts and adds only (the PLAN approximation). The
//                      sigmoid itself follows the logistic-regression learner;
//                      the approximation is this design's choice.
//   * range_reduce() - maps a 32-bit hash onto [0, n) by a multiply-high,
//                      a design choice in place of a modulo.
// All fixed-point values are two's complement; FRAC fractional bits.
package hdc_pkg;

  // Combining mode of the two embeddings (thresholded sum, sum, none,
  // concatenation).
  typedef enum logic [1:0] {
    CMB_OR      = 2'd0,  // phi = phi_n | phi_c   (thresholded sum at 1)
    CMB_SUM     = 2'd1,  // phi = phi_n + phi_c   (counts)
    CMB_NOCOUNT = 2'd2,  // phi = phi_c           (numeric data omitted)
    CMB_CONCAT  = 2'd3   // phi = [phi_n, phi_c]  (2D long)
  } combine_e;

  // Murmur3 x86_32 constants (public algorithm).
  localparam logic [31:0] MM3_C1   = 32'hcc9e2d51;
  localparam logic [31:0] MM3_C2   = 32'h1b873593;
  localparam logic [31:0] MM3_N    = 32'he6546b64;
  localparam logic [31:0] MM3_F1   = 32'h85ebca6b;
  localparam logic [31:0] MM3_F2   = 32'hc2b2ae35;
  localparam logic [31:0] MM3_LEN  = 32'd4;        // key is one 32-bit word

  function automatic logic [31:0] rotl32(input logic [31:0] v, input int unsigned r);
    return (v << r) | (v >> (32 - r));
  endfunction

  // Multiply-high range reduction: floor(h * n / 2^32), uniform on [0, n).
  function automatic logic [31:0] range_reduce(input logic [31:0] h, input logic [31:0] n);
    logic [63:0] prod;
    prod = 64'(h) * 64'(n);
    return prod[63:32];
  endfunction

  // PLAN piecewise-linear sigmoid. x and the result have FRAC fractional
  // bits; the result lies in [0, 1.0]. Segments, for |x|:
  //   [0, 1)      0.25 |x| + 0.5
  //   [1, 2.375)  0.125|x| + 0.625
  //   [2.375, 5)  0.03125|x| + 0.84375
  //   >= 5        1.0
  // and sigma(-x) = 1 - sigma(x).
  function automatic logic signed [31:0] sigmoid_plan(input logic signed [39:0] x,
                                                      input int unsigned frac);
    logic [39:0] ax;
    logic [39:0] one;
    logic [39:0] y;
    one = 40'd1 << frac;
    ax  = x[39] ? 40'(-x) : 40'(x);
    if (ax >= 5 * one)
      y = one;
    else if (ax >= (19 * one) >> 3)                       // 2.375
      y = (ax >> 5) + ((27 * one) >> 5);                  // 0.84375
    else if (ax >= one)
      y = (ax >> 3) + ((5 * one) >> 3);                   // 0.625
    else
      y = (ax >> 2) + (one >> 1);
    if (x[39])
      y = one - y;
    return 32'(y);
  endfunction

endpackage
