// act_sram: activation scratchpad, DEPTH words of 16 bits, one synchronous
// read port and one write port.
//
// It holds the encoder inputs, the encodings, every layer's outputs and the
// values the renderer reads, so concatenations in the networks (skip
// connections, [feature, gamma(d)]) are simply adjacent address ranges.
// A read returns the word one clock after re (the value before a write to
// the same address in that clock). The paper does not describe on-chip
// buffering; this memory is this design's.
module act_sram
  import nf_pkg::*;
#(
  parameter int unsigned DEPTH = SP_DEPTH,
  parameter int unsigned AW    = SP_AW
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output act_t          rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  act_t          wdata
);

  act_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
