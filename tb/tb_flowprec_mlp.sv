// tb_flowprec_mlp: end-to-end test of the accelerator at its default size
// (3 inputs, 120 hidden neurons, 1 output) with the default parameters.
//
// The testbench plays the sensor input buffer (synchronous read through
// x_address / x). It runs 30 inferences: sensor-like readings that rise
// slowly with noise (as level readings do while the flow rises), then random
// 8-bit vectors. For each it checks
//   - the latency from enable to done: 9*HIDDEN + 7 cycles,
//   - the flow estimate y against the reference network,
//   - that done holds while enable is high and falls when it is dropped.
// It also aborts two inferences part-way. Mechanisms that must each happen at
// least once: the ReLU raising an activation to Z_A1, the ReLU passing an
// activation, requantization saturation, an abort followed by a correct run.
module tb_flowprec_mlp;
  import flowprec_pkg::*;
  import tb_ref_pkg::*;

  // Defaults of flowprec_mlp, repeated for the reference model.
  localparam int H    = 120;
  localparam int ZX   = -128;
  localparam int ZW1  = 0;
  localparam int ZA1  = -20;
  localparam int M01  = 27962;
  localparam int N1   = 23;
  localparam int ZW2  = 3;
  localparam int ZY   = 0;
  localparam int M02  = 20972;
  localparam int N2   = 23;
  localparam int LAT  = 9 * H + 7;

  int checks = 0, failures = 0;
  int relu_clamped = 0, relu_passed = 0, saturated = 0, aborts = 0, inferences = 0;
  int y_inside = 0;   // estimates strictly inside the 8-bit range

  logic       clk = 0, rst_n = 0, enable = 0;
  logic       done;
  logic [1:0] x_address;
  data_t      x;
  logic       y_address = 1'b0;
  data_t      y;
  int         xmem [3];

  flowprec_mlp dut (
    .clk(clk), .rst_n(rst_n), .enable(enable), .done(done), .x_address(x_address), .x(x),
    .y_address(y_address), .y(y)
  );

  always #5 clk = ~clk;

  always_ff @(posedge clk) x <= data_t'(xmem[x_address]);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic infer(int x0, int x1, int x2);
    int          cycles;
    int          xv[];
    mlp_result_t r;
    xv = new[3];
    xv[0] = x0; xv[1] = x1; xv[2] = x2;
    for (int i = 0; i < 3; i++) xmem[i] = xv[i];
    r = ref_mlp(xv, H, ZX, ZW1, ZA1, M01, N1, ZW2, ZY, M02, N2);
    relu_clamped += r.relu_clamped;
    relu_passed  += r.relu_passed;
    saturated    += r.saturated;
    @(negedge clk);
    enable = 1;
    cycles = 0;
    do begin
      @(negedge clk);
      cycles++;
    end while (!done && cycles < 2 * LAT);
    checks++;
    if (cycles != LAT) begin
      failures++;
      $display("FAIL latency %0d cycles, expected %0d", cycles, LAT);
    end
    y_address = 1'b0;
    @(negedge clk);
    checks += 2;
    if (int'(y) != r.y) begin
      failures++;
      $display("FAIL x=(%0d,%0d,%0d): y=%0d expected %0d", x0, x1, x2, y, r.y);
    end
    if (!done) begin
      failures++;
      $display("FAIL done dropped while enable high");
    end
    enable = 0;
    @(negedge clk);
    checks++;
    if (done) begin
      failures++;
      $display("FAIL done high after enable dropped");
    end
    if (r.y > -128 && r.y < 127) y_inside++;
    inferences++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Slowly rising, noisy level readings (quantized, zero point -128).
    for (int n = 0; n < 15; n++) begin
      int base;
      base = -100 + 12 * n;
      infer(base + $urandom_range(0, 10), base + 5 + $urandom_range(0, 10),
            base - 20 + $urandom_range(0, 10));
    end
    // Abort part-way, then check a full run.
    for (int a = 0; a < 2; a++) begin
      enable = 1;
      repeat ($urandom_range(10, LAT - 10)) @(negedge clk);
      enable = 0;
      aborts++;
      @(negedge clk);
      checks++;
      if (done) begin
        failures++;
        $display("FAIL done high after abort");
      end
      infer($urandom_range(0, 255) - 128, $urandom_range(0, 255) - 128, $urandom_range(0, 255) - 128);
    end
    for (int n = 0; n < 13; n++) begin
      infer($urandom_range(0, 255) - 128, $urandom_range(0, 255) - 128, $urandom_range(0, 255) - 128);
    end
    checks += 5;
    if (y_inside < 10)     begin failures++; $display("FAIL too few unsaturated estimates"); end
    if (relu_clamped == 0) begin failures++; $display("FAIL ReLU never clamped"); end
    if (relu_passed == 0)  begin failures++; $display("FAIL ReLU never passed a value"); end
    if (saturated == 0)    begin failures++; $display("FAIL no requantization saturation"); end
    if (aborts == 0)       begin failures++; $display("FAIL no abort"); end
    $display("inferences=%0d relu_clamped=%0d relu_passed=%0d saturated=%0d aborts=%0d y_inside=%0d",
             inferences, relu_clamped, relu_passed, saturated, aborts, y_inside);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
