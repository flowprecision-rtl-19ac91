// param_rom: read-only parameter memory of a linear layer (weights or biases).
//
// A trained model's weights and biases are embedded in ROM instances, one
// word per address. The read is synchronous: the word addressed in cycle t
// appears on `data` in cycle t+1, as in an FPGA block RAM used as ROM, so the
// layer controller issues addresses one cycle ahead of their use.
//
// Contents: if INIT_FILE names a hex file (one word per line), it is loaded
// with $readmemh. Otherwise the ROM holds placeholder values computed by
// flowprec_pkg::gen_word(index, SEED, GEN_BITS): the paper embeds trained
// values that it does not publish, so these stand in for them.
//
// Parameters: DEPTH words of WIDTH bits. Interface: clk, addr, data.
module param_rom
  import flowprec_pkg::*;
#(
  parameter int unsigned DEPTH     = 360,
  parameter int unsigned WIDTH     = DATA_W,
  parameter int unsigned SEED      = 1,
  parameter int unsigned GEN_BITS  = WIDTH,
  parameter string       INIT_FILE = "",
  localparam int unsigned AW       = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic [AW-1:0]    addr,
  output logic [WIDTH-1:0] data
);

  logic [WIDTH-1:0] mem [DEPTH];

  initial begin
    if (INIT_FILE != "") begin
      $readmemh(INIT_FILE, mem);
    end else begin
      for (int unsigned i = 0; i < DEPTH; i++) begin
        mem[i] = WIDTH'(gen_word(i, SEED, GEN_BITS));
      end
    end
  end

  always_ff @(posedge clk) begin
    data <= mem[addr];
  end

endmodule
