// flowprec_mlp: integer-only MLP accelerator for soft-sensor flow estimation.
//
// The network maps the readings of three level sensors (8-bit, linearly
// quantized with scale S_X and zero point Z_X) to one flow estimate Y (8-bit,
// S_Y / Z_Y):
//
//   x --> hidden linear layer (3 -> HIDDEN) --> ReLU(max(Z_A1, .)) -->
//         output linear layer (HIDDEN -> 1) --> y
//
// The two layers run one after the other. The hidden layer reads the sensor
// vector through x_address / x from a buffer outside the accelerator and
// fills its own output buffer; when it is done the output layer starts and
// reads the hidden activations from that buffer by address, each word passing
// through the combinational ReLU on the way. The ReLU output keeps the hidden
// layer's quantization (S_A1, Z_A1), so the output layer's input zero point is
// Z_A1. The flow estimate is read from the output layer's buffer through
// y_address / y after `done`.
//
// Handshake: hold `enable` high to run one inference; `done` rises after
// 9*HIDDEN + 7 clock edges (counted from the edge that first samples `enable`
// high) and stays high while `enable` is high. Drop `enable` for at least one
// cycle before the next inference. x must be the word addressed by x_address
// one cycle earlier; y is the word addressed by y_address one cycle earlier.
//
// The structure (layers, ReLU threshold, zero points subtracted before the
// MAC, M0/n rescaling, weights in ROM) follows the paper. The defaults give the
// paper's largest model (120 hidden neurons). Zero points, M0/n and the ROM
// contents of a trained model are not published: the defaults here are
// placeholders of plausible magnitude, and a trained model is loaded by
// overriding them and naming hex files for the ROMs.
module flowprec_mlp
  import flowprec_pkg::*;
#(
  parameter int unsigned IN_FEATURES  = 3,
  parameter int unsigned HIDDEN       = 120,
  parameter int unsigned OUT_FEATURES = 1,
  // hidden layer
  parameter int          Z_X          = -128,
  parameter int          Z_W1         = 0,
  parameter int          Z_A1         = -20,
  parameter int          M0_1         = 27962,
  parameter int          N_SHIFT_1    = 23,
  parameter string       W1_INIT_FILE = "",
  parameter string       B1_INIT_FILE = "",
  // output layer
  parameter int          Z_W2         = 3,
  parameter int          Z_Y          = 0,
  parameter int          M0_2         = 20972,
  parameter int          N_SHIFT_2    = 23,
  parameter string       W2_INIT_FILE = "",
  parameter string       B2_INIT_FILE = "",
  localparam int unsigned XAW = (IN_FEATURES > 1) ? $clog2(IN_FEATURES) : 1,
  localparam int unsigned HAW = (HIDDEN > 1) ? $clog2(HIDDEN) : 1,
  localparam int unsigned YAW = (OUT_FEATURES > 1) ? $clog2(OUT_FEATURES) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           enable,
  output logic           done,
  output logic [XAW-1:0] x_address,
  input  data_t          x,
  input  logic [YAW-1:0] y_address,
  output data_t          y
);

  logic           hidden_done;
  logic [HAW-1:0] a_address;   // output layer -> hidden layer buffer
  data_t          a1;          // hidden layer output A1
  data_t          a2;          // after ReLU, A2

  linear_layer #(
    .IN_FEATURES (IN_FEATURES),
    .OUT_FEATURES(HIDDEN),
    .Z_X         (Z_X),
    .Z_W         (Z_W1),
    .Z_Y         (Z_A1),
    .M0          (M0_1),
    .N_SHIFT     (N_SHIFT_1),
    .W_SEED      (11),
    .B_SEED      (12),
    .B_GEN_BITS  (14),
    .W_INIT_FILE (W1_INIT_FILE),
    .B_INIT_FILE (B1_INIT_FILE)
  ) u_hidden (
    .clk      (clk),
    .rst_n    (rst_n),
    .enable   (enable),
    .done     (hidden_done),
    .x_address(x_address),
    .x        (x),
    .y_address(a_address),
    .y        (a1)
  );

  relu #(.Z_A(Z_A1)) u_relu (
    .in (a1),
    .out(a2)
  );

  linear_layer #(
    .IN_FEATURES (HIDDEN),
    .OUT_FEATURES(OUT_FEATURES),
    .Z_X         (Z_A1),
    .Z_W         (Z_W2),
    .Z_Y         (Z_Y),
    .M0          (M0_2),
    .N_SHIFT     (N_SHIFT_2),
    .W_SEED      (21),
    .B_SEED      (22),
    .B_GEN_BITS  (14),
    .W_INIT_FILE (W2_INIT_FILE),
    .B_INIT_FILE (B2_INIT_FILE)
  ) u_output (
    .clk      (clk),
    .rst_n    (rst_n),
    .enable   (enable && hidden_done),
    .done     (done),
    .x_address(a_address),
    .x        (a2),
    .y_address(y_address),
    .y        (y)
  );

endmodule
