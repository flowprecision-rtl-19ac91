// linear_layer: integer-only fully connected layer, Y = requant(W*(x-Zx) + B*).
//
// For each output neuron j = 0..J-1 in turn, the layer streams the K inputs
// x[k] and weights W[j][k] through the zero-point-corrected MAC pipeline,
// seeds the accumulator with the bias B*[j], rescales the finished sum with
// M0 and n, adds Z_Y and stores the 8-bit result in its output buffer Y[j].
// This is the paper's MAC algorithm: load W[j][0], x[0], B[j]; accumulate
// (W-Zw)(x-Zx) while the next pair is fetched; shift after the loop; store.
//
// Schedule of one neuron (t counts cycles from the neuron's start):
//   t = 0 .. K-1   address x[t], W[j][t] (and B[j] at t = 0) are issued
//   t = 1 .. K     data arrive and enter the MAC pipeline, one pair per cycle
//   t = K+3        the finished sum leaves the MAC pipeline
//   t = K+4        the requantized value is written to Y[j]
// so one neuron takes K+5 cycles and neurons are processed back to back
// without overlap. The paper gives the algorithm, not this cycle schedule; it
// was chosen so that a 3-input / H-hidden / 1-output network takes 9 cycles per
// hidden neuron, the slope of the paper's measured inference times.
//
// Handshake (in the style of the template family the paper builds on): raise
// `enable` to start; the layer runs to completion and then holds `done` high
// for as long as `enable` stays high. Dropping `enable` returns the layer to
// idle at once (also mid-run) and clears `done`; raise it again for a new run.
// From the clock edge that first samples `enable` high, `done` rises
// J*(K+5)+1 edges later.
//
// Inputs are read by address: x_address in cycle t, x in cycle t+1 (a
// synchronous buffer or ROM on the other side). Outputs are read the same way
// through y_address / y, and stay valid until the next run overwrites them.
//
// Parameters: IN_FEATURES (K), OUT_FEATURES (J), the zero points Z_X, Z_W,
// Z_Y, the rescaling pair M0 / N_SHIFT, and the ROM contents (hex files, or
// placeholder values from the seeds when the file names are empty). The
// defaults are those of the hidden layer of the 120-neuron model; the
// numeric zero points and M0/n are placeholders, as trained values are not
// published.
module linear_layer
  import flowprec_pkg::*;
#(
  parameter int unsigned IN_FEATURES  = 3,
  parameter int unsigned OUT_FEATURES = 120,
  parameter int          Z_X          = -128,
  parameter int          Z_W          = 0,
  parameter int          Z_Y          = -20,
  parameter int          M0           = 27962,
  parameter int          N_SHIFT      = 23,
  parameter int unsigned W_SEED       = 11,
  parameter int unsigned B_SEED       = 12,
  parameter int unsigned B_GEN_BITS   = 14,
  parameter string       W_INIT_FILE  = "",
  parameter string       B_INIT_FILE  = "",
  localparam int unsigned XAW = (IN_FEATURES > 1) ? $clog2(IN_FEATURES) : 1,
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

  localparam int unsigned K    = IN_FEATURES;
  localparam int unsigned J    = OUT_FEATURES;
  localparam int unsigned NW   = K * J;
  localparam int unsigned WAW  = (NW > 1) ? $clog2(NW) : 1;
  localparam int unsigned TLEN = K + 5;            // cycles per neuron
  localparam int unsigned TW   = $clog2(TLEN + 1);

  typedef enum logic [1:0] {IDLE, RUN, FINISHED} state_t;

  state_t         state;
  logic [YAW-1:0] j;
  logic [TW-1:0]  t;
  logic [WAW-1:0] w_ptr;

  // Issue control for the current cycle.
  logic issue, issue_first, issue_last, neuron_end;
  assign issue       = (state == RUN) && (t < TW'(K));
  assign issue_first = issue && (t == '0);
  assign issue_last  = issue && (t == TW'(K - 1));
  assign neuron_end  = (state == RUN) && (t == TW'(TLEN - 1));

  always_ff @(posedge clk) begin
    if (!rst_n || !enable) begin
      state <= IDLE;
      j     <= '0;
      t     <= '0;
      w_ptr <= '0;
    end else begin
      unique case (state)
        IDLE: begin
          state <= RUN;
          j     <= '0;
          t     <= '0;
          w_ptr <= '0;
        end
        RUN: begin
          if (issue) w_ptr <= w_ptr + 1'b1;
          if (neuron_end) begin
            t <= '0;
            if (j == YAW'(J - 1)) begin
              state <= FINISHED;
            end else begin
              j <= j + 1'b1;
            end
          end else begin
            t <= t + 1'b1;
          end
        end
        FINISHED: state <= FINISHED;
        default:  state <= IDLE;
      endcase
    end
  end

  assign done      = (state == FINISHED);
  assign x_address = issue ? XAW'(t) : '0;

  // Parameter ROMs.
  logic [DATA_W-1:0] w_word;
  logic [ACC_W-1:0]  b_word;

  param_rom #(
    .DEPTH(NW), .WIDTH(DATA_W), .SEED(W_SEED), .GEN_BITS(DATA_W), .INIT_FILE(W_INIT_FILE)
  ) u_weights (
    .clk (clk),
    .addr(w_ptr),
    .data(w_word)
  );

  param_rom #(
    .DEPTH(J), .WIDTH(ACC_W), .SEED(B_SEED), .GEN_BITS(B_GEN_BITS), .INIT_FILE(B_INIT_FILE)
  ) u_biases (
    .clk (clk),
    .addr(j),
    .data(b_word)
  );

  // The datapath pipeline is flushed whenever the layer is idle, so that an
  // aborted run leaves nothing in flight.
  logic pipe_rst_n;
  assign pipe_rst_n = rst_n && enable;

  // Read latency alignment: ROM and input data arrive one cycle after issue.
  logic d_valid, d_first, d_last;
  always_ff @(posedge clk) begin
    if (!pipe_rst_n) begin
      d_valid <= 1'b0;
      d_first <= 1'b0;
      d_last  <= 1'b0;
    end else begin
      d_valid <= issue;
      d_first <= issue_first;
      d_last  <= issue_last;
    end
  end

  logic sum_valid;
  acc_t sum;

  mac_pipeline #(.Z_X(Z_X), .Z_W(Z_W)) u_mac (
    .clk      (clk),
    .rst_n    (pipe_rst_n),
    .in_valid (d_valid),
    .in_first (d_first),
    .in_last  (d_last),
    .x        (x),
    .w        (data_t'(w_word)),
    .bias     (acc_t'(b_word)),
    .sum_valid(sum_valid),
    .sum      (sum)
  );

  logic  q_valid;
  data_t q_y;

  requantizer #(.M0(M0), .N_SHIFT(N_SHIFT), .Z_Y(Z_Y)) u_requant (
    .clk      (clk),
    .rst_n    (pipe_rst_n),
    .in_valid (sum_valid),
    .sum      (sum),
    .out_valid(q_valid),
    .y        (q_y)
  );

  output_buffer #(.DEPTH(J)) u_ybuf (
    .clk  (clk),
    .we   (q_valid && (state == RUN)),
    .waddr(j),
    .wdata(q_y),
    .raddr(y_address),
    .rdata(y)
  );

  // done falls in the cycle after enable is dropped.
  done_follows_enable: assert property (@(posedge clk) disable iff (!rst_n)
    !enable |=> !done);

  // The store of neuron j must happen in the last cycle of that neuron.
  store_in_last_cycle: assert property (@(posedge clk) disable iff (!rst_n)
    (q_valid && state == RUN) |-> neuron_end);

endmodule
