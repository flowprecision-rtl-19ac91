// mac_pipeline: zero-point-corrected multiply-accumulate for one output neuron.
//
// Computes sum = B* + SUM_k (x[k] - Z_X) * (W[k] - Z_W) over a stream of
// (x, W) pairs, one pair per clock. Following the paper, the zero points are
// subtracted in a stage of their own before the multiplication, and the MAC is
// pipelined so that a new pair can enter every cycle:
//
//   stage 1  zero-point subtraction    xd = x - Z_X, wd = W - Z_W   (9-bit)
//   stage 2  multiplication            p  = xd * wd                 (18-bit)
//   stage 3  accumulation              sum = (first ? B* : sum) + p (32-bit)
//
// The bias enters with the first pair of a neuron (in_first) and seeds the
// accumulator, so no separate clear cycle is needed. in_last marks the final
// pair; sum_valid pulses for one cycle, three cycles after that pair entered,
// with the finished sum on `sum` (which holds until the next first pair is
// accumulated). The three-stage split and the bias handling are this design's
// choice; the paper fixes only the order subtract -> multiply -> accumulate.
//
// Parameters Z_X and Z_W are the zero points of the layer's input and weights.
module mac_pipeline
  import flowprec_pkg::*;
#(
  parameter int Z_X = 0,
  parameter int Z_W = 0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_first,
  input  logic  in_last,
  input  data_t x,
  input  data_t w,
  input  acc_t  bias,
  output logic  sum_valid,
  output acc_t  sum
);

  localparam diff_t ZX = diff_t'(Z_X);
  localparam diff_t ZW = diff_t'(Z_W);

  // Stage 1: zero-point subtraction.
  logic  v1, first1, last1;
  diff_t xd1, wd1;
  acc_t  bias1;
  // Stage 2: multiplication.
  logic  v2, first2, last2;
  prod_t p2;
  acc_t  bias2;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      v2 <= 1'b0;
      sum_valid <= 1'b0;
      sum <= '0;
    end else begin
      v1 <= in_valid;
      v2 <= v1;
      sum_valid <= v2 && last2;
      if (v2) begin
        sum <= (first2 ? bias2 : sum) + acc_t'(p2);
      end
    end
    first1 <= in_first;
    last1  <= in_last;
    xd1    <= diff_t'(x) - ZX;
    wd1    <= diff_t'(w) - ZW;
    bias1  <= bias;
    first2 <= first1;
    last2  <= last1;
    p2     <= xd1 * wd1;
    bias2  <= bias1;
  end

endmodule
