// tb_mac_pipeline: random dot products through the zero-point-corrected MAC.
// Vectors of 1..10 pairs are streamed one pair per cycle, sometimes back to
// back and sometimes with idle gaps. For each vector, sum_valid must rise
// exactly three cycles after the last pair and `sum` must equal
// bias + SUM (x - Z_X)(w - Z_W), computed here with plain integers.
module tb_mac_pipeline;
  import flowprec_pkg::*;
  import tb_ref_pkg::*;

  localparam int ZX = -128;
  localparam int ZW = 3;

  int checks = 0, failures = 0;

  logic  clk = 0, rst_n = 0;
  logic  in_valid = 0, in_first = 0, in_last = 0;
  data_t x = '0, w = '0;
  acc_t  bias = '0;
  logic  sum_valid;
  acc_t  sum;

  mac_pipeline #(.Z_X(ZX), .Z_W(ZW)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_first(in_first), .in_last(in_last),
    .x(x), .w(w), .bias(bias), .sum_valid(sum_valid), .sum(sum)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected results, queued with the cycle at which they are due.
  longint exp_q[$];
  int     due_q[$];
  int     cycle = 0;

  always @(posedge clk) cycle <= cycle + 1;

  // Checker: compare at each sum_valid, and flag one that is not due.
  always @(negedge clk) begin
    if (rst_n) begin
      if (due_q.size() > 0 && due_q[0] == cycle) begin
        checks++;
        if (!sum_valid || longint'(sum) != exp_q[0]) begin
          failures++;
          $display("FAIL cycle %0d: sum=%0d valid=%0b expected %0d", cycle, sum, sum_valid, exp_q[0]);
        end
        void'(exp_q.pop_front());
        void'(due_q.pop_front());
      end else if (sum_valid) begin
        failures++;
        $display("FAIL unexpected sum_valid at cycle %0d", cycle);
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < 300; v++) begin
      int     len;
      longint s;
      len = $urandom_range(1, 10);
      bias = acc_t'($signed($urandom()) >>> 16);
      s = longint'(bias);
      for (int k = 0; k < len; k++) begin
        x = data_t'($urandom());
        w = data_t'($urandom());
        in_valid = 1;
        in_first = (k == 0);
        in_last  = (k == len - 1);
        s += longint'(int'(x) - ZX) * longint'(int'(w) - ZW);
        if (k == len - 1) begin
          exp_q.push_back(s);
          due_q.push_back(cycle + 3);
        end
        @(negedge clk);
        bias = acc_t'($urandom());   // bias is only sampled with the first pair
      end
      in_valid = 0;
      in_first = 0;
      in_last  = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    repeat (6) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d results never arrived", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
