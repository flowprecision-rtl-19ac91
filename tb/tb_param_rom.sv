// tb_param_rom: checks both ways of filling a parameter ROM.
// A 50-word 8-bit ROM with placeholder contents and a 20-word 32-bit ROM with
// 14-bit placeholder values are compared word by word against the reference
// formula; a 6-word ROM loaded from tb/tb_param_rom.hex is compared against
// the values written in that file. Data must appear one cycle after the
// address.
module tb_param_rom;
  import flowprec_pkg::*;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;

  logic        clk = 0;
  logic [5:0]  addr_w = '0;
  logic [4:0]  addr_b = '0;
  logic [2:0]  addr_f = '0;
  logic [7:0]  data_w;
  logic [31:0] data_b;
  logic [7:0]  data_f;

  param_rom #(.DEPTH(50), .WIDTH(8), .SEED(11), .GEN_BITS(8)) dut_w (
    .clk(clk), .addr(addr_w), .data(data_w)
  );
  param_rom #(.DEPTH(20), .WIDTH(32), .SEED(12), .GEN_BITS(14)) dut_b (
    .clk(clk), .addr(addr_b), .data(data_b)
  );
  param_rom #(.DEPTH(6), .WIDTH(8), .INIT_FILE("tb/tb_param_rom.hex")) dut_f (
    .clk(clk), .addr(addr_f), .data(data_f)
  );

  const int file_words [6] = '{8'h05, 8'hF3, 8'h7F, 8'h80, 8'h00, 8'h2A};

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int i = 0; i < 50; i++) begin
      addr_w = 6'(i);
      addr_b = 5'(i % 20);
      addr_f = 3'(i % 6);
      #1;
      // Synchronous read: the output must not follow the new address yet.
      if (i > 0) begin
        checks++;
        if (longint'($signed(data_w)) != ref_word(i - 1, 11, 8)) begin
          failures++;
          $display("FAIL weight ROM output changed before the clock edge");
        end
      end
      @(negedge clk);
      checks += 3;
      if (longint'($signed(data_w)) != ref_word(i, 11, 8)) begin
        failures++;
        $display("FAIL weight %0d: %0d expected %0d", i, $signed(data_w), ref_word(i, 11, 8));
      end
      if (longint'($signed(data_b)) != ref_word(i % 20, 12, 14)) begin
        failures++;
        $display("FAIL bias %0d: %0d expected %0d", i % 20, $signed(data_b), ref_word(i % 20, 12, 14));
      end
      if (int'(data_f) != file_words[i % 6]) begin
        failures++;
        $display("FAIL file word %0d: %h expected %h", i % 6, data_f, file_words[i % 6]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
