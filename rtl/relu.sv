// relu: integer-only ReLU for linearly quantized activations.
//
// Real zero is represented by the activation's zero point Z_A, so
// ReLU(real) = max(0, real) becomes out = max(Z_A, in) on the quantized
// integers: a comparator and a multiplexer. Input and output share the scale
// and zero point of the preceding layer's output, so no rescaling is needed.
//
// As in the paper, the unit works element by element and is purely
// combinational: the output follows the input in the same cycle, so it can sit
// on the read-data path between one layer's output buffer and the next layer.
module relu
  import flowprec_pkg::*;
#(
  parameter int Z_A = 0
) (
  input  data_t in,
  output data_t out
);

  localparam data_t ZA = data_t'(Z_A);

  always_comb begin
    out = (in < ZA) ? ZA : in;
  end

endmodule
