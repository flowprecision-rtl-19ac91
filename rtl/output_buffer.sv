// output_buffer: the buffer Y into which a linear layer stores its outputs.
//
// A simple dual-port RAM of DEPTH signed 8-bit words: the layer writes Y[j]
// once per neuron through the write port; the next stage (the ReLU and the
// following layer, or the host for the last layer) reads by address through
// the read port. Both ports are synchronous: the word addressed in cycle t is
// on rdata in cycle t+1, the same timing as the parameter ROMs, so a layer
// treats its input buffer and its weight ROM alike. A read of the address
// being written in the same cycle returns the old word.
//
// The paper names the buffer and its role; its organisation (one RAM, one
// write and one read port, synchronous read) is this design's choice.
module output_buffer
  import flowprec_pkg::*;
#(
  parameter int unsigned DEPTH = 120,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  data_t         wdata,
  input  logic [AW-1:0] raddr,
  output data_t         rdata
);

  data_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
