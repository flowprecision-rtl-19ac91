// tb_linear_layer: one linear layer (K = 5 inputs, J = 6 outputs) against the
// reference model.
//
// The testbench plays the input buffer: it answers x_address with the word
// one cycle later. For 40 random input vectors it raises enable, counts the
// cycles to done (must be J*(K+5)+1), checks that done holds while enable
// stays high, reads all J outputs back through y_address and compares them
// with the reference layer. It also aborts runs part-way by dropping enable,
// checks that done falls, and that the next complete run is still correct.
// Requantization saturation must occur at least once.
module tb_linear_layer;
  import flowprec_pkg::*;
  import tb_ref_pkg::*;

  localparam int K   = 5;
  localparam int J   = 6;
  localparam int ZX  = -128;
  localparam int ZW  = 3;
  localparam int ZY  = -20;
  localparam int M0  = 27962;
  localparam int N   = 23;
  localparam int LAT = J * (K + 5) + 1;

  int checks = 0, failures = 0;
  int saturations = 0, aborts = 0;

  logic       clk = 0, rst_n = 0, enable = 0;
  logic       done;
  logic [2:0] x_address;
  data_t      x;
  logic [2:0] y_address = '0;
  data_t      y;
  int         xmem [K];

  linear_layer #(
    .IN_FEATURES(K), .OUT_FEATURES(J), .Z_X(ZX), .Z_W(ZW), .Z_Y(ZY), .M0(M0), .N_SHIFT(N),
    .W_SEED(11), .B_SEED(12), .B_GEN_BITS(14)
  ) dut (
    .clk(clk), .rst_n(rst_n), .enable(enable), .done(done), .x_address(x_address), .x(x),
    .y_address(y_address), .y(y)
  );

  always #5 clk = ~clk;

  // Input buffer model: synchronous read.
  always_ff @(posedge clk) x <= data_t'(xmem[x_address]);

  always @(negedge clk) begin
    if (int'(x_address) >= K) begin
      failures++;
      $display("FAIL x_address %0d out of range", x_address);
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_and_check();
    int cycles;
    int xv[];
    xv = new[K];
    for (int i = 0; i < K; i++) begin
      xmem[i] = $urandom_range(0, 255) - 128;
      xv[i] = xmem[i];
    end
    @(negedge clk);
    enable = 1;
    cycles = 0;
    do begin
      @(negedge clk);
      cycles++;
    end while (!done && cycles < 10 * LAT);
    checks++;
    if (cycles != LAT) begin
      failures++;
      $display("FAIL latency %0d cycles, expected %0d", cycles, LAT);
    end
    for (int j = 0; j < J; j++) begin
      longint s;
      int     e;
      s = ref_neuron_sum(xv, K, j, ZX, ZW, 11, 12, 14);
      e = ref_requant(s, M0, N, ZY);
      if (ref_saturates(s, M0, N, ZY)) saturations++;
      y_address = 3'(j);
      @(negedge clk);
      checks += 2;
      if (int'(y) != e) begin
        failures++;
        $display("FAIL y[%0d] = %0d, expected %0d", j, y, e);
      end
      if (!done) begin
        failures++;
        $display("FAIL done dropped while enable high");
      end
    end
    enable = 0;
    @(negedge clk);
    checks++;
    if (done) begin
      failures++;
      $display("FAIL done still high after enable dropped");
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      if (n % 5 == 2) begin
        // Abort a run part-way and check that the layer returns to idle.
        enable = 1;
        repeat ($urandom_range(1, LAT - 2)) @(negedge clk);
        enable = 0;
        aborts++;
        @(negedge clk);
        checks++;
        if (done) begin
          failures++;
          $display("FAIL done high after abort");
        end
      end
      run_and_check();
    end
    checks += 2;
    if (saturations == 0) begin failures++; $display("FAIL no saturation exercised"); end
    if (aborts == 0) begin failures++; $display("FAIL no abort exercised"); end
    $display("saturations=%0d aborts=%0d", saturations, aborts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
