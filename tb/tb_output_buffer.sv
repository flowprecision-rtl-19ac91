// tb_output_buffer: write/read test of the layer output buffer.
// Fills all words of a 30-word buffer, reads every word back (data one cycle
// after the address), rewrites random words while reading the same and other
// addresses, and checks that a read of the word being written returns the old
// value.
module tb_output_buffer;
  import flowprec_pkg::*;

  localparam int DEPTH = 30;

  int checks = 0, failures = 0;

  logic              clk = 0, we = 0;
  logic [4:0]        waddr = '0, raddr = '0;
  data_t             wdata = '0;
  data_t             rdata;
  int                model [DEPTH];

  output_buffer #(.DEPTH(DEPTH)) dut (
    .clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .raddr(raddr), .rdata(rdata)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      we = 1; waddr = 5'(i); wdata = data_t'($urandom()); model[i] = int'(wdata);
      @(negedge clk);
    end
    we = 0;
    for (int i = 0; i < DEPTH; i++) begin
      raddr = 5'(i);
      @(negedge clk);
      checks++;
      if (int'(rdata) != model[i]) begin
        failures++;
        $display("FAIL read %0d: %0d expected %0d", i, rdata, model[i]);
      end
    end
    for (int n = 0; n < 500; n++) begin
      int a, r, old;
      a = $urandom_range(0, DEPTH - 1);
      r = ($urandom_range(0, 3) == 0) ? a : $urandom_range(0, DEPTH - 1);
      old = model[r];
      we = 1; waddr = 5'(a); wdata = data_t'($urandom()); raddr = 5'(r);
      @(negedge clk);
      model[a] = int'(wdata);
      checks++;
      if (int'(rdata) != old) begin
        failures++;
        $display("FAIL read %0d during write %0d: %0d expected %0d", r, a, rdata, old);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
