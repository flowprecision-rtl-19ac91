// tb_requantizer: random and corner accumulators through the M0 / n rescaler.
// Each sum is applied for one cycle; the result must appear with out_valid
// exactly one cycle later and equal clamp(floor(sum*M0 / 2^n) + Z_Y) computed
// with floor division. Both saturation directions are required to occur.
module tb_requantizer;
  import flowprec_pkg::*;
  import tb_ref_pkg::*;

  localparam int M0 = 27962;
  localparam int N  = 23;
  localparam int ZY = -20;

  int checks = 0, failures = 0;
  int sat_hi = 0, sat_lo = 0;

  logic  clk = 0, rst_n = 0, in_valid = 0;
  acc_t  sum = '0;
  logic  out_valid;
  data_t y;

  requantizer #(.M0(M0), .N_SHIFT(N), .Z_Y(ZY)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .sum(sum), .out_valid(out_valid), .y(y)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(longint s);
    int exp_y;
    exp_y = ref_requant(s, M0, N, ZY);
    if (s * M0 / (64'sd1 <<< N) + ZY > 127) sat_hi++;
    if (s * M0 / (64'sd1 <<< N) + ZY < -128) sat_lo++;
    @(negedge clk);
    sum = acc_t'(s);
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!out_valid || int'(y) != exp_y) begin
      failures++;
      $display("FAIL sum=%0d y=%0d valid=%0b expected %0d", s, y, out_valid, exp_y);
    end
    @(negedge clk);
    checks++;
    if (out_valid) begin
      failures++;
      $display("FAIL out_valid longer than one cycle");
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    apply(0);
    apply(1);
    apply(-1);
    apply(300);
    apply(-300);
    apply(2147483647);
    apply(-64'sd2147483648);
    for (int i = 0; i < 400; i++) begin
      longint s;
      s = longint'($signed($urandom())) >>> ($urandom_range(0, 20));
      apply(s);
    end
    checks += 2;
    if (sat_hi == 0) begin failures++; $display("FAIL no upper saturation seen"); end
    if (sat_lo == 0) begin failures++; $display("FAIL no lower saturation seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
