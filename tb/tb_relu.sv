// tb_relu: exhaustive test of the integer ReLU for two thresholds.
// Every 8-bit input is applied to a unit with Z_A = -20 and one with Z_A = 37;
// each output must equal max(Z_A, in) in the same time step (combinational).
module tb_relu;
  import flowprec_pkg::*;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;
  int clamped = 0;

  data_t in;
  data_t out_a, out_b;

  relu #(.Z_A(-20)) dut_a (.in(in), .out(out_a));
  relu #(.Z_A(37))  dut_b (.in(in), .out(out_b));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -128; v <= 127; v++) begin
      in = data_t'(v);
      #1;
      checks += 2;
      if (int'(out_a) != ref_relu(v, -20)) begin
        failures++;
        $display("FAIL Z_A=-20 in=%0d out=%0d", v, out_a);
      end
      if (int'(out_b) != ref_relu(v, 37)) begin
        failures++;
        $display("FAIL Z_A=37 in=%0d out=%0d", v, out_b);
      end
      if (v < -20) clamped++;
    end
    checks++;
    if (clamped == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
