// flowprec_pkg: types, widths and helper functions shared by the integer-only
// MLP accelerator for soft-sensor flow estimation.
//
// Every tensor that travels between units (inputs X, weights W, hidden
// activations A, output Y) is a signed 8-bit integer in linear (affine)
// quantization, real = S * (q - Z). Biases are stored already rescaled to the
// accumulator's scale S_X*S_W (the B* of the integer-only formulation) and are
// therefore as wide as the accumulator. The 8-bit width follows the paper; the
// 32-bit accumulator/bias width and the 32-bit multiplier M0 are this design's
// choice (the usual choice for integer-only inference).
//
// gen_word() is the formula behind the placeholder ROM contents used when no
// trained parameters are supplied: a 32-bit integer hash of (index, seed),
// whose low GEN_BITS bits are taken and sign-extended. Testbenches carry their
// own copy of the formula to build reference models.
package flowprec_pkg;

  localparam int DATA_W = 8;   // width of X, W, A, Y
  localparam int ACC_W  = 32;  // accumulator and bias width
  localparam int PROD_W = 2 * (DATA_W + 1);  // (x-Zx)*(w-Zw), both 9-bit signed

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [DATA_W:0]   diff_t;   // value minus zero point
  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Integer hash used for placeholder ROM contents.
  function automatic logic [31:0] hash32(input int unsigned idx, input int unsigned seed);
    logic [31:0] h;
    h = idx * 32'h9E37_79B1 + seed * 32'h85EB_CA77 + 32'h1234_5678;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A_2D39;
    h = h ^ (h >> 15);
    return h;
  endfunction

  // Low gen_bits bits of the hash, sign-extended to 32 bits.
  function automatic logic signed [31:0] gen_word(input int unsigned idx, input int unsigned seed,
                                                  input int unsigned gen_bits);
    logic [31:0] h;
    h = hash32(idx, seed);
    return $signed(h << (32 - gen_bits)) >>> (32 - gen_bits);
  endfunction

endpackage
