// tb_flowprec_workloads: the model configurations of the evaluation.
//
// Four linearly quantized models with 10, 30, 60 and 120 hidden neurons
// (3 sensor inputs, 1 flow output), plus a 10-neuron model in which both
// layers use the (6,8) fixed-point format of the ablation study, expressed
// as the special case Z = 0 everywhere and a rescale of 2^-6 (M0 = 1, n = 6).
// One accelerator per configuration runs, in parallel, 20 inferences on
// sensor-like inputs that rise with noise. Each inference must match the
// reference network and take 9*H + 7 cycles from enable to done. At 100 MHz
// these are 0.97, 2.77, 5.47 and 10.87 us, against 1.01, 2.81, 5.51 and
// 10.91 us measured for the published design. Cycle counts are printed.
module tb_flowprec_workloads;
  import flowprec_pkg::*;
  import tb_ref_pkg::*;

  localparam int NSIZES = 5;
  // per configuration: H, Z_X, Z_W1, Z_A1, M0_1, N_SHIFT_1, Z_W2, Z_Y, M0_2, N_SHIFT_2
  localparam int CFG [NSIZES * 10] = '{
    10,  -128, 0, -20, 27962, 23, 3, 0, 20972, 23,
    30,  -128, 0, -20, 27962, 23, 3, 0, 20972, 23,
    60,  -128, 0, -20, 27962, 23, 3, 0, 20972, 23,
    120, -128, 0, -20, 27962, 23, 3, 0, 20972, 23,
    10,  0,    0, 0,   1,     6,  0, 0, 1,     6
  };
  localparam int SAMPLES = 20;

  int checks = 0, failures = 0;
  int finished = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < NSIZES; g++) begin : g_size
    localparam int H = CFG[g * 10 + 0];

    logic       enable = 0;
    logic       done;
    logic [1:0] x_address;
    data_t      x;
    data_t      y;
    int         xmem [3];

    flowprec_mlp #(
      .HIDDEN(H), .Z_X(CFG[g * 10 + 1]), .Z_W1(CFG[g * 10 + 2]), .Z_A1(CFG[g * 10 + 3]), .M0_1(CFG[g * 10 + 4]),
      .N_SHIFT_1(CFG[g * 10 + 5]), .Z_W2(CFG[g * 10 + 6]), .Z_Y(CFG[g * 10 + 7]), .M0_2(CFG[g * 10 + 8]), .N_SHIFT_2(CFG[g * 10 + 9])
    ) dut (
      .clk(clk), .rst_n(rst_n), .enable(enable), .done(done), .x_address(x_address), .x(x),
      .y_address(1'b0), .y(y)
    );

    always_ff @(posedge clk) x <= data_t'(xmem[x_address]);

    initial begin
      int          cycles;
      int          xv[];
      mlp_result_t r;
      xv = new[3];
      wait (rst_n);
      for (int n = 0; n < SAMPLES; n++) begin
        xv[0] = -110 + 10 * n + $urandom_range(0, 8);
        xv[1] = -105 + 10 * n + $urandom_range(0, 8);
        xv[2] = -120 + 6 * n + $urandom_range(0, 8);
        for (int i = 0; i < 3; i++) xmem[i] = xv[i];
        r = ref_mlp(xv, H, CFG[g * 10 + 1], CFG[g * 10 + 2], CFG[g * 10 + 3], CFG[g * 10 + 4], CFG[g * 10 + 5],
                    CFG[g * 10 + 6], CFG[g * 10 + 7], CFG[g * 10 + 8], CFG[g * 10 + 9]);
        @(negedge clk);
        enable = 1;
        cycles = 0;
        do begin
          @(negedge clk);
          cycles++;
        end while (!done && cycles < 2 * (9 * H + 7));
        @(negedge clk);
        checks += 2;
        if (cycles != 9 * H + 7) begin
          failures++;
          $display("FAIL H=%0d latency %0d, expected %0d", H, cycles, 9 * H + 7);
        end
        if (int'(y) != r.y) begin
          failures++;
          $display("FAIL configuration %0d sample %0d: y=%0d expected %0d", g, n, y, r.y);
        end
        enable = 0;
        if (n == 0) $display("configuration %0d, H=%0d: %0d cycles per inference", g, H, cycles);
      end
      finished++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (finished == NSIZES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
