// requantizer: brings a layer's 32-bit accumulator back to an 8-bit activation.
//
// Integer-only inference replaces the real factor S_in*S_W/S_out by
// M0 * 2^-n with a positive integer M0, so the output of neuron j is
//
//   y = clamp( (sum * M0) >>> n  + Z_Y , -128, 127 )
//
// The multiplication, shift and zero-point addition follow the paper's
// algorithm (steps 12 and 13). Two choices are this design's own: the shift is
// arithmetic (rounds towards minus infinity), and the result is saturated to
// the signed 8-bit range, the range quantization clamps every tensor to.
// The product is formed at 64 bits, so it cannot overflow for M0 < 2^31.
//
// Timing: one register stage. A sum presented with in_valid in cycle t gives
// y with out_valid in cycle t+1. Parameters: M0 (multiplier, > 0), N_SHIFT
// (right shift n), Z_Y (output zero point).
module requantizer
  import flowprec_pkg::*;
#(
  parameter int M0      = 1,
  parameter int N_SHIFT = 0,
  parameter int Z_Y     = 0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  acc_t  sum,
  output logic  out_valid,
  output data_t y
);

  localparam int QMIN = -(2 ** (DATA_W - 1));
  localparam int QMAX = (2 ** (DATA_W - 1)) - 1;

  logic signed [63:0] scaled;
  logic signed [63:0] shifted;
  data_t              y_next;

  always_comb begin
    scaled  = 64'(sum) * 64'(M0);
    shifted = (scaled >>> N_SHIFT) + 64'(Z_Y);
    if (shifted > 64'(QMAX)) begin
      y_next = data_t'(QMAX);
    end else if (shifted < 64'(QMIN)) begin
      y_next = data_t'(QMIN);
    end else begin
      y_next = data_t'(shifted);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= y_next;
    end
  end

  initial begin
    assert (M0 > 0) else $error("requantizer: M0 must be a positive integer");
    assert (N_SHIFT >= 0 && N_SHIFT < 63) else $error("requantizer: N_SHIFT out of range");
  end

endmodule
